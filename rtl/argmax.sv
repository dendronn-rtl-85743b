// argmax -- index of the largest of N values ("Max").
//
// A combinational scan keeps the running maximum and its index; a value
// replaces the maximum only if it is strictly larger, so ties go to the lower
// index.  SIGNED selects two's-complement or unsigned comparison.  The output
// layer uses one instance on the spike counts and one on the potentials.  The
// block is the paper's; the tie rule is this design's choice.
module argmax #(
  parameter int unsigned N      = 20,
  parameter int unsigned W      = 8,
  parameter bit          SIGNED = 1'b1,
  localparam int unsigned I_W   = (N > 1) ? $clog2(N) : 1
) (
  input  logic [W-1:0]   vals [N],
  output logic [I_W-1:0] idx,
  output logic [W-1:0]   max_val
);

  always_comb begin
    idx     = '0;
    max_val = vals[0];
    for (int i = 1; i < N; i++) begin
      if (SIGNED ? ($signed(vals[i]) > $signed(max_val)) : (vals[i] > max_val)) begin
        idx     = I_W'(i);
        max_val = vals[i];
      end
    end
  end

endmodule
