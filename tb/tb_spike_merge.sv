// tb_spike_merge -- self-checking test of the round-robin spike merge.
//
// Four producers each offer a numbered sequence of spikes with random gaps;
// the consumer applies random back-pressure.  Checks: every spike arrives
// once and in order per producer (unit index carries producer and sequence
// number), a producer's offer stays until taken, and with all four requesting
// continuously the grants rotate so no producer waits more than three
// handshakes (checked at every grant).
module tb_spike_merge;
  import dendronn_pkg::*;
  localparam int unsigned N = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] in_valid = '0, in_ready;
  logic [U_W-1:0] in_unit [N];
  logic out_valid, out_ready = 1'b0;
  logic [U_W-1:0] out_unit;

  spike_merge #(.N(N)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_unit, .out_valid, .out_ready, .out_unit);

  int sent [N], got [N], wait_cnt [N];
  int max_wait = 0;
  bit saturate = 0;

  // unit = seq * N + producer
  always @(negedge clk) begin
    if (rst_n) begin
      out_ready <= saturate ? 1'b1 : ($urandom_range(0, 3) != 0);
      for (int i = 0; i < N; i++) begin
        if (!in_valid[i] && sent[i] < (saturate ? 200 : 100) && (saturate || $urandom_range(0, 2) == 0)) begin
          in_valid[i] <= 1'b1;
          in_unit[i]  <= U_W'(sent[i] * N + i);
        end
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      automatic int pr = int'(out_unit) % N;
      automatic int sq = int'(out_unit) / N;
      checks++;
      if (sq != got[pr]) begin failures++; $display("FAIL: producer %0d seq %0d expected %0d", pr, sq, got[pr]); end
      got[pr]++;
    end
    for (int i = 0; i < N; i++) begin
      if (in_valid[i] && in_ready[i]) begin
        in_valid[i] <= 1'b0;
        sent[i]++;
        if (saturate) begin
          // with every producer requesting, nobody may wait more than N-1 grants
          checks++;
          if (wait_cnt[i] > N - 1) begin
            failures++; $display("FAIL: producer %0d waited %0d handshakes", i, wait_cnt[i]);
          end
        end
        wait_cnt[i] = 0;
      end else if (in_valid[i] && out_valid && out_ready) begin
        wait_cnt[i]++;
        if (saturate && wait_cnt[i] > max_wait) max_wait = wait_cnt[i];
      end
    end
  end

  initial begin
    for (int i = 0; i < N; i++) begin sent[i] = 0; got[i] = 0; wait_cnt[i] = 0; in_unit[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    repeat (1500) @(negedge clk);
    saturate = 1;
    repeat (1500) @(negedge clk);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (got[i] != sent[i] || sent[i] != 200) begin failures++; $display("FAIL: producer %0d sent %0d got %0d", i, sent[i], got[i]); end
    end
    checks++;
    if (max_wait > N - 1) begin failures++; $display("FAIL: a producer waited %0d handshakes", max_wait); end
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
