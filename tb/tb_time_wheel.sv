// tb_time_wheel -- self-checking test of the wheel pointer, phase and clears.
//
// A small wheel (D = 8) is ticked many times.  The testbench keeps its own
// count of ticks and checks p = ticks mod D, g = parity of the wrap count, that
// every wrap issues exactly one clear of the plane that was current before the
// wrap, that no tick is granted while the pipeline is busy or a clear is
// running, and that sample_start resets p and g and clears both planes.
module tb_time_wheel;
  localparam int unsigned D = 8;
  localparam int unsigned P_W = $clog2(D);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic sample_start = 1'b0, tick_req = 1'b0, pipe_idle = 1'b1, clr_busy = 1'b0;
  logic tick_ack, g, clr_start, clr_all, clr_plane, busy;
  logic [P_W-1:0] p;
  logic [15:0] n_wraps;
  logic [31:0] n_ticks;

  time_wheel #(.D(D)) dut (.clk, .rst_n, .sample_start, .tick_req, .tick_ack, .pipe_idle,
    .p, .g, .clr_start, .clr_all, .clr_plane, .clr_busy, .busy, .n_wraps, .n_ticks);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  int ticks = 0, wraps = 0, clears = 0;
  bit exp_plane;

  // Model of the engines' clear: busy for a few cycles after clr_start.
  always @(posedge clk) begin
    if (clr_start) begin
      clears++;
      clr_busy <= 1'b1;
      fork begin repeat ($urandom_range(1, 6)) @(posedge clk); clr_busy <= 1'b0; end join_none
    end
  end

  // A tick may not be granted while busy or while the pipeline is not idle.
  always @(posedge clk) if (rst_n && tick_ack) begin
    checks++;
    if (busy || !pipe_idle || !tick_req) begin failures++; $display("FAIL: tick granted illegally"); end
  end

  task automatic start_sample();
    @(negedge clk) sample_start = 1'b1;
    @(negedge clk) sample_start = 1'b0;
    check(busy, "busy after sample_start");
    check(p == 0 && g == 0, "p and g reset");
    @(posedge clk); #1;
    check(clr_all == 1'b1, "sample clear covers both planes");
    while (busy) @(negedge clk);
    ticks = 0; wraps = 0;
  endtask

  initial begin
    int cl0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    start_sample();
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      pipe_idle = ($urandom_range(0, 3) != 0);
      tick_req  = ($urandom_range(0, 1) != 0);
      #1;
      if (tick_ack) begin
        automatic bit was_wrap = (p == P_W'(D - 1));
        exp_plane = g;
        cl0 = clears;
        ticks++;
        @(negedge clk);
        tick_req = 1'b0;
        check(p == P_W'(ticks % D), $sformatf("p=%0d expected %0d", p, ticks % D));
        if (was_wrap) begin
          wraps++;
          check(g == wraps[0], "phase toggled on wrap");
          check(busy, "busy during wrap clear");
          @(negedge clk);
          check(clears == cl0 + 1, "one clear per wrap");
          check(clr_all == 1'b0 && clr_plane == exp_plane, "old current plane is cleared");
          while (busy) @(negedge clk);
        end else begin
          check(g == wraps[0], "phase unchanged");
          check(!busy, "no clear without wrap");
        end
      end else begin
        #1 tick_req = 1'b0;
      end
    end
    check(wraps >= 3, $sformatf("several wraps seen (%0d)", wraps));
    check(n_wraps == 16'(wraps) && n_ticks == 32'(ticks), "counters");
    // new sample resets the wheel
    start_sample();
    check(n_ticks == 0 && n_wraps == 0, "counters reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
