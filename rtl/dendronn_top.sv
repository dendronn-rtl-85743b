// dendronn_top -- DendroNN sequence-detection accelerator (three spines per unit).
//
// Data flow, one sample at a time:
//   sensor events -> aer_binner: (t, c) tuples, one wheel tick per 8 ms bin
//   -> cr_router: adjacency list of channel c, four targets <u,s> per word
//   -> N_UE update_engines, each with its own usm_bank (units u mod N_UE)
//      -> spine 0 schedules, spine 1 matches and re-schedules, spine 2 matches
//         and emits a hidden-unit spike
//   -> spike_merge -> output_classifier: int8 weights, output neurons,
//      spike counters, two argmax units and the decision multiplexer.
// time_wheel holds the wheel pointer p and generation bit g shared by all
// engines, grants ticks only when router and engines are idle, and orders a
// plane-clear sweep after every wrap and a full clear at sample start.
//
// Use: write the configuration (cfg_sel selects chan_ptr, conn_list, the
// intervals of row {unit, stage}, or a weight row) while no sample runs; pulse
// sample_start; stream the events of the sample with timestamps counted from
// its start, the last one flagged with ev_last (events offered during the
// start-of-sample clear are held back by the handshake).  The statistics on
// the stats port restart at every sample_start.  When every event has been
// processed the output layer latches its decision and decision_valid rises;
// busy falls.
//
// N_S = 2 builds the two-spine variant (one state stage per unit, spine 1
// emits the spike, only dt0 is configured); the default is three spines.
//
// The block structure follows the paper's microarchitecture for DendroNN(3);
// the single clock, the handshakes, the configuration port and the end-of-sample
// handling are this design's choices (the paper's chip is clockless).
module dendronn_top import dendronn_pkg::*; #(
  parameter int unsigned N_UNITS   = 3000,
  parameter int unsigned N_UE      = 4,
  parameter int unsigned D         = 256,
  parameter int unsigned DT_W      = 8,
  parameter int unsigned N_IN      = 1024,
  parameter int unsigned CR_DEPTH  = 4096,
  parameter int unsigned N_CLASSES = 20,
  parameter int unsigned TS_W      = 32,
  parameter int unsigned BIN_LEN   = 8000,
  parameter int unsigned ACC_W     = 8,
  parameter int unsigned CNT_W     = 16,
  parameter int unsigned N_S       = 3,     // spines per unit: 3, or 2 for the two-spine variant
  localparam int unsigned UPB      = (N_UNITS + N_UE - 1) / N_UE,
  localparam int unsigned P_W      = $clog2(D),
  localparam int unsigned K_W      = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1,
  localparam int unsigned ROWS     = (N_S - 1) * UPB,
  localparam int unsigned RA_W     = $clog2(ROWS),
  localparam int unsigned RW       = DT_W + 2 * D,
  localparam int unsigned C_W      = $clog2(N_IN)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    sample_start,
  // sensor events
  input  logic                    ev_valid,
  output logic                    ev_ready,
  input  logic [TS_W-1:0]         ev_ts,
  input  logic [15:0]             ev_addr,
  input  logic                    ev_last,
  // configuration
  input  logic                    cfg_we,
  input  cfg_sel_e                cfg_sel,
  input  logic [CFG_AW-1:0]       cfg_addr,
  input  logic [CFG_DW-1:0]       cfg_wdata,
  // run-time settings
  input  logic                    mode,       // 1: spike-count decision, 0: potential
  input  logic [ACC_W-1:0]        thr,        // output-neuron threshold
  input  logic                    refr_en,    // at most one spike per unit and sample
  // results
  output logic                    busy,
  output logic                    decision_valid,
  output logic [K_W-1:0]          decision,
  output logic signed [ACC_W-1:0] u [N_CLASSES],
  output logic [CNT_W-1:0]        cnt [N_CLASSES],
  output logic                    hs_valid,
  output logic [U_W-1:0]          hs_unit,
  output stats_t                  stats
);

  // Statistics collected from the blocks.
  logic [31:0] st_ticks, st_words, st_hidden, st_outspk, st_clr, st_stall, st_conf;
  logic [15:0] st_wraps;

  // ---------------- AER ----------------
  logic            tick_req, tick_ack;
  logic            aer_valid, aer_ready;
  logic [15:0]     aer_t;
  logic [C_W-1:0]  aer_c;
  logic            eos;
  logic [15:0]     dropped;

  aer_binner #(.TS_W(TS_W), .BIN_LEN(BIN_LEN), .N_IN(N_IN), .T_W(16), .A_W(16)) u_aer (
    .clk, .rst_n, .sample_start,
    .ev_valid, .ev_ready, .ev_ts, .ev_addr, .ev_last,
    .tick_req, .tick_ack,
    .out_valid (aer_valid), .out_ready (aer_ready), .out_t (aer_t), .out_c (aer_c),
    .eos, .dropped
  );

  // ---------------- time wheel ----------------
  logic [P_W-1:0]  p;
  logic            g;
  logic            clr_start, clr_all, clr_plane, clr_busy;
  logic            tw_busy;
  logic            pipe_idle;
  logic [N_UE-1:0] ue_idle, ue_clearing;
  logic            cr_busy;

  assign clr_busy  = |ue_clearing;
  assign pipe_idle = !cr_busy && (&ue_idle);

  time_wheel #(.D(D)) u_tw (
    .clk, .rst_n, .sample_start,
    .tick_req, .tick_ack, .pipe_idle,
    .p, .g, .clr_start, .clr_all, .clr_plane, .clr_busy,
    .busy (tw_busy), .n_wraps (st_wraps), .n_ticks (st_ticks)
  );

  // ---------------- connectivity router ----------------
  logic [N_UE-1:0] tgt_valid, tgt_ready;
  target_t         tgt [N_UE];
  logic            cr_in_ready;

  assign aer_ready = cr_in_ready && !tw_busy;

  cr_router #(.N_IN(N_IN), .CR_DEPTH(CR_DEPTH), .N_UE(N_UE)) u_cr (
    .clk, .rst_n, .clear (sample_start),
    .in_valid (aer_valid && !tw_busy), .in_ready (cr_in_ready), .in_c (aer_c),
    .tgt_valid, .tgt_ready, .tgt,
    .cfg_ptr_we  (cfg_we && cfg_sel == CFG_CHAN_PTR),
    .cfg_conn_we (cfg_we && cfg_sel == CFG_CONN),
    .cfg_addr, .cfg_wdata,
    .busy (cr_busy), .n_words (st_words)
  );

  // The wheel pointer must be the bin index of every event the router takes.
  assert property (@(posedge clk) disable iff (!rst_n)
    (aer_valid && aer_ready) |-> (P_W'(aer_t) == p));

  // ---------------- update engines and USM banks ----------------
  logic [N_UE-1:0] spk_valid, spk_ready;
  logic [U_W-1:0]  spk_unit [N_UE];
  logic [31:0]     c_sched [N_UE], c_m1 [N_UE], c_m2 [N_UE], c_wrap [N_UE], c_refr [N_UE];
  logic [U_W-1:0]  cfg_unit;

  assign cfg_unit = cfg_addr[U_W:1];

  for (genvar i = 0; i < N_UE; i++) begin : g_ue
    logic            rd_en, wr_en;
    logic [RA_W-1:0] rd_addr, wr_addr;
    logic [RW-1:0]   rd_data, wr_data, wr_mask;

    update_engine #(.UNITS_PER_BANK(UPB), .N_UE(N_UE), .LANE(i), .D(D), .DT_W(DT_W), .N_S(N_S)) u_ue (
      .clk, .rst_n,
      .tgt_valid (tgt_valid[i]), .tgt_ready (tgt_ready[i]), .tgt (tgt[i]),
      .p, .g, .clr_start, .clr_all, .clr_plane, .clearing (ue_clearing[i]),
      .refr_en,
      .cfg_we    (cfg_we && cfg_sel == CFG_USM_DT && (32'(cfg_unit) % N_UE) == i),
      .cfg_unit, .cfg_stage (cfg_addr[0]), .cfg_dt (cfg_wdata[DT_W-1:0]),
      .spk_valid (spk_valid[i]), .spk_ready (spk_ready[i]), .spk_unit (spk_unit[i]),
      .idle (ue_idle[i]),
      .n_sched (c_sched[i]), .n_match1 (c_m1[i]), .n_match2 (c_m2[i]),
      .n_wrap_sched (c_wrap[i]), .n_refr (c_refr[i]),
      .usm_rd_en (rd_en), .usm_rd_addr (rd_addr), .usm_rd_data (rd_data),
      .usm_wr_en (wr_en), .usm_wr_addr (wr_addr), .usm_wr_data (wr_data), .usm_wr_mask (wr_mask)
    );

    usm_bank #(.ROWS(ROWS), .D(D), .DT_W(DT_W)) u_usm (
      .clk, .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data, .wr_mask
    );
  end

  // ---------------- spike merge ----------------
  logic hs_ready;

  spike_merge #(.N(N_UE)) u_merge (
    .clk, .rst_n,
    .in_valid (spk_valid), .in_ready (spk_ready), .in_unit (spk_unit),
    .out_valid (hs_valid), .out_ready (hs_ready), .out_unit (hs_unit)
  );

  // ---------------- output layer ----------------
  logic finish, eos_pend, oc_idle;

  output_classifier #(.N_UNITS(N_UNITS), .N_CLASSES(N_CLASSES), .ACC_W(ACC_W), .CNT_W(CNT_W)) u_out (
    .clk, .rst_n, .clear (sample_start), .mode, .thr,
    .hs_valid, .hs_ready, .hs_unit,
    .finish, .idle (oc_idle), .decision_valid, .decision, .u, .cnt,
    .n_hidden (st_hidden), .n_out_spikes (st_outspk),
    .cfg_we    (cfg_we && cfg_sel == CFG_OUT_W),
    .cfg_addr  ($clog2(N_UNITS)'(cfg_addr)),
    .cfg_wdata (cfg_wdata[N_CLASSES*W_W-1:0])
  );

  // ---------------- sample control and statistics ----------------
  // The sample ends once the last event has left the AER and the router, the
  // engines and the wheel are idle; the output layer then drains and decides.
  assign finish = eos_pend && pipe_idle && !tw_busy && !hs_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      eos_pend <= 1'b0;
      busy     <= 1'b0;
      st_clr      <= '0;
      st_stall     <= '0;
      st_conf <= '0;
    end else if (sample_start) begin
      eos_pend <= 1'b0;
      busy     <= 1'b1;
      st_clr      <= '0;
      st_stall     <= '0;
      st_conf <= '0;
    end else begin
      if (eos)    eos_pend <= 1'b1;
      if (finish) eos_pend <= 1'b0;
      if (decision_valid) busy <= 1'b0;
      if (tw_busy) st_clr <= st_clr + 1;
      st_stall <= st_stall + 32'($countones(tgt_valid & ~tgt_ready));
      if ($countones(spk_valid) > 1) st_conf <= st_conf + 1;
    end
  end

  logic [31:0] st_sched, st_wrap, st_m1, st_m2, st_refr;

  always_comb begin
    st_sched = '0;
    st_wrap  = '0;
    st_m1    = '0;
    st_m2    = '0;
    st_refr  = '0;
    for (int i = 0; i < N_UE; i++) begin
      st_sched = st_sched + c_sched[i];
      st_wrap  = st_wrap + c_wrap[i];
      st_m1    = st_m1 + c_m1[i];
      st_m2    = st_m2 + c_m2[i];
      st_refr  = st_refr + c_refr[i];
    end
  end

  assign stats = '{ticks: st_ticks, wraps: st_wraps, clr_cycles: st_clr, cr_words: st_words,
                    lane_stalls: st_stall, sched: st_sched, wrap_sched: st_wrap,
                    match1: st_m1, match2: st_m2, refr: st_refr, merge_conflicts: st_conf,
                    hidden: st_hidden, out_spikes: st_outspk, dropped: dropped};

endmodule
