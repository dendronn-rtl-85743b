// tb_output_neuron_logic -- self-checking test of the output neurons.
//
// Random int8 weight rows are applied to 6 neurons with 8-bit state, first in
// potential mode (pure saturating integrators), then in spike-count mode with
// threshold 40.  A testbench model computes the saturated sums, the spike bits
// (sum >= threshold) and the subtraction, and every cycle's u and s are
// compared.  Large weights make saturation at +127 / -128 happen.
module tb_output_neuron_logic;
  import dendronn_pkg::*;
  localparam int unsigned NC = 6, ACC_W = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear = 1'b0, mode = 1'b0, in_valid = 1'b0;
  logic [ACC_W-1:0] thr = 8'd40;
  logic [NC*W_W-1:0] in_w = '0;
  logic signed [ACC_W-1:0] u [NC];
  logic s_valid;
  logic [NC-1:0] s;

  output_neuron_logic #(.N_CLASSES(NC), .ACC_W(ACC_W)) dut (.clk, .rst_n, .clear, .mode, .thr,
    .in_valid, .in_w, .u, .s_valid, .s);

  int mu [NC];
  int n_sat = 0, n_spk = 0;

  task automatic step(bit v);
    logic [NC-1:0] es;
    es = '0;
    @(negedge clk);
    in_valid = v;
    for (int j = 0; j < NC; j++) in_w[j*W_W +: W_W] = W_W'($urandom_range(0, 255));
    if (v) for (int j = 0; j < NC; j++) begin
      automatic int w = int'($signed(in_w[j*W_W +: W_W]));
      automatic int sum = mu[j] + w;
      if (sum > 127) begin sum = 127; n_sat++; end
      if (sum < -128) begin sum = -128; n_sat++; end
      if (mode && sum >= int'(thr)) begin es[j] = 1'b1; sum -= int'(thr); n_spk++; end
      mu[j] = sum;
    end
    @(negedge clk);
    in_valid = 1'b0;
    checks++;
    if (s_valid != v || (v && s != es)) begin failures++; $display("FAIL: s %b expected %b", s, es); end
    for (int j = 0; j < NC; j++) begin
      checks++;
      if (int'(u[j]) != mu[j]) begin failures++; $display("FAIL: u[%0d]=%0d expected %0d", j, u[j], mu[j]); end
    end
  endtask

  initial begin
    for (int j = 0; j < NC; j++) mu[j] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 200; n++) step($urandom_range(0, 3) != 0);
    mode = 1'b1;
    @(negedge clk) clear = 1'b1;
    @(negedge clk) clear = 1'b0;
    for (int j = 0; j < NC; j++) mu[j] = 0;
    for (int n = 0; n < 200; n++) step($urandom_range(0, 3) != 0);
    checks++;
    if (n_sat == 0 || n_spk == 0) begin failures++; $display("FAIL: saturation %0d spikes %0d", n_sat, n_spk); end
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
