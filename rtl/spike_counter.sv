// spike_counter -- per-class spike counters of the output layer ("Cnt").
//
// Counts, for every output neuron, the spikes it emits during a sample.  Each
// s_valid cycle adds the bits of s to the counters; a counter stops at its
// maximum instead of wrapping.  clear zeroes all counters at sample start.
// The counter block is the paper's; the width and saturation are this
// design's choices.
module spike_counter #(
  parameter int unsigned N_CLASSES = 20,
  parameter int unsigned CNT_W     = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 s_valid,
  input  logic [N_CLASSES-1:0] s,
  output logic [CNT_W-1:0]     cnt [N_CLASSES]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < N_CLASSES; j++) cnt[j] <= '0;
    end else if (clear) begin
      for (int j = 0; j < N_CLASSES; j++) cnt[j] <= '0;
    end else if (s_valid) begin
      for (int j = 0; j < N_CLASSES; j++) begin
        if (s[j] && (cnt[j] != '1)) cnt[j] <= cnt[j] + 1'b1;
      end
    end
  end

endmodule
