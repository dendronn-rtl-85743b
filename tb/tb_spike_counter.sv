// tb_spike_counter -- self-checking test of the per-class spike counters.
//
// Random spike vectors are counted by 5 counters of 4 bits, so that some
// counters reach their maximum and must stop there; clear must zero them.
// Each cycle the counters are compared with a testbench model.
module tb_spike_counter;
  localparam int unsigned NC = 5, CNT_W = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear = 1'b0, s_valid = 1'b0;
  logic [NC-1:0] s = '0;
  logic [CNT_W-1:0] cnt [NC];
  int model [NC];

  spike_counter #(.N_CLASSES(NC), .CNT_W(CNT_W)) dut (.clk, .rst_n, .clear, .s_valid, .s, .cnt);

  initial begin
    for (int j = 0; j < NC; j++) model[j] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      clear = (n == 150);
      s_valid = ($urandom_range(0, 1) != 0);
      s = NC'($urandom);
      if (clear) for (int j = 0; j < NC; j++) model[j] = 0;
      else if (s_valid) for (int j = 0; j < NC; j++) if (s[j] && model[j] < 15) model[j]++;
      @(posedge clk); #1;
      for (int j = 0; j < NC; j++) begin
        checks++;
        if (int'(cnt[j]) != model[j]) begin failures++; $display("FAIL: cnt[%0d]=%0d expected %0d", j, cnt[j], model[j]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
