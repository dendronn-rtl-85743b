// output_classifier -- output layer: weight memory, output neurons, Cnt, Max, decision.
//
// A hidden-unit spike (hs_unit) reads that unit's weight row from the output
// weight memory; one cycle later the row is applied to all output neurons at
// once.  The neurons' spikes are counted per class.  Two argmax units watch the
// spike counts and the potentials; when the controller signals the end of a
// sample (finish) and the two-stage pipeline is empty, the decision multiplexer
// latches the class chosen by the spike counts (mode = 1) or by the potentials
// (mode = 0) and raises decision_valid until the next clear.  The potentials and
// counts are also brought out, for use as regression outputs.
//
// The chain weight memory -> output neuron logic -> (S: Cnt -> Max, u: Max) ->
// decision multiplexer follows the paper's block diagram.  The pipeline, the
// finish handshake and the mode encoding are this design's choices.
//
// Timing: accepts one hidden spike per cycle; decision_valid rises two cycles
// after finish at the earliest.
module output_classifier import dendronn_pkg::*; #(
  parameter int unsigned N_UNITS   = 3000,
  parameter int unsigned N_CLASSES = 20,
  parameter int unsigned ACC_W     = 8,
  parameter int unsigned CNT_W     = 16,
  localparam int unsigned A_W      = $clog2(N_UNITS),
  localparam int unsigned K_W      = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic                        mode,
  input  logic [ACC_W-1:0]            thr,
  // hidden spikes
  input  logic                        hs_valid,
  output logic                        hs_ready,
  input  logic [U_W-1:0]              hs_unit,
  // end of sample
  input  logic                        finish,
  output logic                        idle,
  output logic                        decision_valid,
  output logic [K_W-1:0]              decision,
  output logic signed [ACC_W-1:0]     u [N_CLASSES],
  output logic [CNT_W-1:0]            cnt [N_CLASSES],
  output logic [31:0]                 n_hidden,
  output logic [31:0]                 n_out_spikes,
  // weight configuration
  input  logic                        cfg_we,
  input  logic [A_W-1:0]              cfg_addr,
  input  logic [N_CLASSES*W_W-1:0]    cfg_wdata
);

  logic                       rd_v;        // weight row arrives this cycle
  logic [N_CLASSES*W_W-1:0]   w_row;
  logic                       s_valid;
  logic [N_CLASSES-1:0]       s;
  logic                       fin_pend;
  logic [K_W-1:0]             idx_cnt, idx_u;
  logic [CNT_W-1:0]           max_cnt;
  logic [ACC_W-1:0]           max_u;
  logic [ACC_W-1:0]           u_vals [N_CLASSES];

  assign hs_ready = 1'b1;

  out_weight_sram #(.N_UNITS(N_UNITS), .N_CLASSES(N_CLASSES)) u_wsram (
    .clk     (clk),
    .rd_en   (hs_valid),
    .rd_addr (A_W'(hs_unit)),
    .rd_data (w_row),
    .wr_en   (cfg_we),
    .wr_addr (cfg_addr),
    .wr_data (cfg_wdata)
  );

  output_neuron_logic #(.N_CLASSES(N_CLASSES), .ACC_W(ACC_W)) u_neur (
    .clk      (clk),
    .rst_n    (rst_n),
    .clear    (clear),
    .mode     (mode),
    .thr      (thr),
    .in_valid (rd_v),
    .in_w     (w_row),
    .u        (u),
    .s_valid  (s_valid),
    .s        (s)
  );

  spike_counter #(.N_CLASSES(N_CLASSES), .CNT_W(CNT_W)) u_cnt (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (clear),
    .s_valid (s_valid),
    .s       (s),
    .cnt     (cnt)
  );

  always_comb for (int j = 0; j < N_CLASSES; j++) u_vals[j] = u[j];

  argmax #(.N(N_CLASSES), .W(CNT_W), .SIGNED(1'b0)) u_max_cnt (
    .vals (cnt), .idx (idx_cnt), .max_val (max_cnt)
  );
  argmax #(.N(N_CLASSES), .W(ACC_W), .SIGNED(1'b1)) u_max_u (
    .vals (u_vals), .idx (idx_u), .max_val (max_u)
  );

  assign idle = !rd_v && !s_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_v           <= 1'b0;
      fin_pend       <= 1'b0;
      decision_valid <= 1'b0;
      decision       <= '0;
      n_hidden       <= '0;
      n_out_spikes   <= '0;
    end else if (clear) begin
      rd_v           <= 1'b0;
      fin_pend       <= 1'b0;
      decision_valid <= 1'b0;
      decision       <= '0;
      n_hidden       <= '0;
      n_out_spikes   <= '0;
    end else begin
      rd_v <= hs_valid;
      if (hs_valid) n_hidden <= n_hidden + 1;
      if (s_valid)  n_out_spikes <= n_out_spikes + 32'($countones(s));
      if (finish) fin_pend <= 1'b1;
      if ((fin_pend || finish) && idle && !hs_valid) begin
        fin_pend       <= 1'b0;
        decision_valid <= 1'b1;
        decision       <= mode ? idx_cnt : idx_u;    // decision multiplexer
      end
    end
  end

endmodule
