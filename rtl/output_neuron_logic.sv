// output_neuron_logic -- the output neurons of the classifier.
//
// There is one neuron per class with a signed ACC_W-bit state u.  Every input
// is the weight row of a hidden unit that has fired; each neuron adds its
// weight to u, saturating at the signed range.  In potential mode (mode = 0)
// the neurons are plain non-leaking integrators and u at the end of the sample
// is the result.  In spike-count mode (mode = 1) a neuron whose sum reaches the
// threshold thr emits a spike on s and subtracts thr (at most one spike per
// input), so the number of spikes tracks the integrated input.
//
// The paper gives the two readouts (spikes S and potential u), integrator
// units and an 8-bit integrator state; saturation, the threshold-and-subtract
// spike rule and the mode input are this design's choices.
//
// Timing: one input per cycle, no back-pressure; u and the s pulse
// (s_valid) appear on the cycle after the input.  clear zeroes all states.
module output_neuron_logic import dendronn_pkg::*; #(
  parameter int unsigned N_CLASSES = 20,
  parameter int unsigned ACC_W     = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic                          mode,
  input  logic [ACC_W-1:0]              thr,
  input  logic                          in_valid,
  input  logic [N_CLASSES*W_W-1:0]      in_w,
  output logic signed [ACC_W-1:0]       u [N_CLASSES],
  output logic                          s_valid,
  output logic [N_CLASSES-1:0]          s
);

  localparam int unsigned SUM_W = ((ACC_W > W_W) ? ACC_W : W_W) + 1;
  localparam logic signed [SUM_W-1:0] MAXV = SUM_W'((1 << (ACC_W - 1)) - 1);
  localparam logic signed [SUM_W-1:0] MINV = -SUM_W'(1 << (ACC_W - 1));

  logic signed [ACC_W-1:0] u_next [N_CLASSES];
  logic [N_CLASSES-1:0]    s_next;

  always_comb begin
    for (int j = 0; j < N_CLASSES; j++) begin
      automatic logic signed [SUM_W-1:0] sum;
      automatic logic signed [SUM_W-1:0] sat;
      sum = SUM_W'(u[j]) + SUM_W'($signed(in_w[j*W_W +: W_W]));
      if (sum > MAXV)      sat = MAXV;
      else if (sum < MINV) sat = MINV;
      else                 sat = sum;
      s_next[j] = mode && (sat >= $signed(SUM_W'(thr)));
      u_next[j] = s_next[j] ? ACC_W'(sat - SUM_W'(thr)) : ACC_W'(sat);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < N_CLASSES; j++) u[j] <= '0;
      s_valid <= 1'b0;
      s       <= '0;
    end else if (clear) begin
      for (int j = 0; j < N_CLASSES; j++) u[j] <= '0;
      s_valid <= 1'b0;
      s       <= '0;
    end else begin
      s_valid <= in_valid;
      s       <= in_valid ? s_next : '0;
      if (in_valid) begin
        for (int j = 0; j < N_CLASSES; j++) u[j] <= u_next[j];
      end
    end
  end

endmodule
