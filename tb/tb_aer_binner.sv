// tb_aer_binner -- self-checking test of the AER binner.
//
// Random time-ordered events (BIN_LEN = 10 time units, gaps that cross zero,
// one or several bin boundaries) with a few addresses outside the channel
// range.  The testbench acknowledges tick requests after a random delay and
// checks: the number of ticks before each event equals floor(ts / BIN_LEN)
// minus the bin already reached, every forwarded tuple has t = floor(ts /
// BIN_LEN) and c = address, no tick is requested while a tuple waits in the
// output register, out-of-range addresses are dropped and counted, and eos
// follows the last event.
module tb_aer_binner;
  localparam int unsigned BIN = 10;
  localparam int unsigned N_IN = 24;
  localparam int unsigned C_W = $clog2(N_IN);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic sample_start = 1'b0;
  logic ev_valid = 1'b0, ev_ready, ev_last = 1'b0;
  logic [31:0] ev_ts = '0;
  logic [15:0] ev_addr = '0;
  logic tick_req, tick_ack = 1'b0;
  logic out_valid, out_ready = 1'b0;
  logic [15:0] out_t;
  logic [C_W-1:0] out_c;
  logic eos;
  logic [15:0] dropped;

  aer_binner #(.TS_W(32), .BIN_LEN(BIN), .N_IN(N_IN), .T_W(16), .A_W(16)) dut (
    .clk, .rst_n, .sample_start, .ev_valid, .ev_ready, .ev_ts, .ev_addr, .ev_last,
    .tick_req, .tick_ack, .out_valid, .out_ready, .out_t, .out_c, .eos, .dropped);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // expected output queue
  int exp_t [$], exp_c [$];
  int ticks = 0, n_eos = 0, exp_drop = 0;

  // tick responder
  always @(posedge clk) begin
    if (tick_req && !tick_ack && $urandom_range(0, 2) == 0) tick_ack <= 1'b1;
    else tick_ack <= 1'b0;
    if (tick_ack) ticks++;
    if (tick_req) begin
      checks++;
      if (out_valid) begin failures++; $display("FAIL: tick requested with a tuple pending"); end
    end
    if (eos) n_eos++;
  end

  // sink with random back-pressure
  always @(negedge clk) out_ready <= ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (exp_t.size() == 0) begin failures++; $display("FAIL: unexpected output"); end
    else begin
      automatic int et = exp_t.pop_front();
      automatic int ec = exp_c.pop_front();
      if (out_t != 16'(et) || out_c != C_W'(ec)) begin
        failures++; $display("FAIL: got (t=%0d,c=%0d) expected (t=%0d,c=%0d)", out_t, out_c, et, ec);
      end
      if (16'(ticks) != out_t) begin
        failures++; $display("FAIL: ticks %0d for bin %0d", ticks, out_t);
      end
    end
  end

  initial begin
    int ts = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk) sample_start = 1'b1;
    @(negedge clk) sample_start = 1'b0;
    for (int n = 0; n < 300; n++) begin
      automatic int gap = ($urandom_range(0, 3) == 0) ? $urandom_range(0, 45) : $urandom_range(0, 4);
      automatic int addr = ($urandom_range(0, 15) == 0) ? $urandom_range(N_IN, 200) : $urandom_range(0, N_IN - 1);
      ts += gap;
      if (addr < N_IN) begin exp_t.push_back(ts / BIN); exp_c.push_back(addr); end
      else exp_drop++;
      ev_valid = 1'b1; ev_ts = 32'(ts); ev_addr = 16'(addr); ev_last = (n == 299);
      @(posedge clk);
      while (!ev_ready) @(posedge clk);
      @(negedge clk);
      ev_valid = 1'b0; ev_last = 1'b0;
    end
    repeat (20) @(negedge clk);
    check(exp_t.size() == 0, $sformatf("all tuples delivered (%0d left)", exp_t.size()));
    check(dropped == 16'(exp_drop), $sformatf("dropped %0d expected %0d", dropped, exp_drop));
    check(n_eos == 1, $sformatf("one eos pulse (%0d)", n_eos));
    check(ticks == ts / BIN, $sformatf("total ticks %0d expected %0d", ticks, ts / BIN));
    check(exp_drop > 0, "some addresses dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
