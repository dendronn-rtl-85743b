// spike_merge -- round-robin merge of the update engines' unit spikes.
//
// Each update engine offers the index of a hidden unit that has just detected
// its sequence.  The output layer has one weight-memory port, so the N streams
// are merged into one: a round-robin pointer picks the first requesting engine
// at or after it, that engine's spike is passed through combinationally, and
// on a handshake the pointer moves past the granted engine.  At most one spike
// per cycle leaves the block; no engine waits more than N-1 handshakes.
//
// The paper sends the hidden-unit spikes of all engines to one output
// classifier; the arbiter that does it here is this design's choice.
module spike_merge import dendronn_pkg::*; #(
  parameter int unsigned N   = 4,
  localparam int unsigned I_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [N-1:0]   in_valid,
  output logic [N-1:0]   in_ready,
  input  logic [U_W-1:0] in_unit [N],
  output logic           out_valid,
  input  logic           out_ready,
  output logic [U_W-1:0] out_unit
);

  logic [I_W-1:0] rr;       // highest priority this cycle
  logic [I_W-1:0] grant;
  logic           found;

  always_comb begin
    grant = rr;
    found = 1'b0;
    for (int k = 0; k < N; k++) begin
      automatic int unsigned idx = (int'(rr) + k) % N;
      if (!found && in_valid[idx]) begin
        grant = I_W'(idx);
        found = 1'b1;
      end
    end
    out_valid = found;
    out_unit  = in_unit[grant];
    in_ready  = '0;
    in_ready[grant] = found && out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (out_valid && out_ready) rr <= I_W'((int'(grant) + 1) % N);
  end

endmodule
