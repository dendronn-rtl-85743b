// update_engine -- unit update engine (UE) for one bank of hidden units.
//
// The engine receives router targets <u,s> and applies the spine operation of
// the time-wheel algorithm to its USM bank.  With p the wheel pointer and g the
// current generation plane:
//
//   s = 0  read the stage-1 row, q = (p + dt0) mod D; set slot q in plane g if
//          p + dt0 < D, else in plane ~g (the next wheel generation).
//   s = 1  read the stage-1 row; if slot p, plane g is set ("due"), clear it,
//          then read the stage-2 row and schedule slot (p + dt1) mod D the same
//          way.  Otherwise nothing happens.
//   s = 2  read the stage-2 row; if due, clear it and emit a spike of unit u.
//
// A unit therefore fires when its three inputs arrive in order with exactly
// dt0 and dt1 bins between them, and several partial matches of one unit can
// be in flight at once as separate slot bits.  With refr_en set a unit fires at
// most once per sample (a "fired" bit per unit, cleared at sample start); later
// matches are still consumed.  The engine also runs the plane-clear sweep
// ordered by the time wheel (one masked row write per cycle over all rows) and
// writes intervals from the configuration port.
//
// The three spine operations, the due test and the overflow-based generation
// choice follow the paper exactly, for N_S = 3 and acceptance window 0.  The
// sequential one-target-at-a-time schedule, the banking (local unit index
// u / N_UE) and the refractory bit array are this design's choices, and the
// paper's clockless pipeline is replaced by clocked valid/ready handshakes.
//
// N_S selects the number of spines per unit: 3 (default, two state stages,
// the configuration described above) or 2 (one stage: spine 1 is then the
// final spine, checks stage 1 and emits the spike).  Each stage is one row of
// the bank: row 2*lu + k for N_S = 3, row lu for N_S = 2.  n_match1 counts
// intermediate matches (spine 1 when N_S = 3), n_match2 final-spine matches.
//
// Timing: s = 0 takes 2 cycles, s = 1 3 cycles on a match (2 otherwise),
// s = 2 2 cycles plus the wait for spk_ready.  A clear sweep takes ROWS cycles.
// Configuration writes are taken only while the engine is idle.
module update_engine import dendronn_pkg::*; #(
  parameter int unsigned UNITS_PER_BANK = 750,
  parameter int unsigned N_UE           = 4,
  parameter int unsigned LANE           = 0,
  parameter int unsigned D              = 256,
  parameter int unsigned DT_W           = 8,
  parameter int unsigned N_S            = 3,
  localparam int unsigned ROWS = (N_S - 1) * UNITS_PER_BANK,
  localparam int unsigned RA_W = $clog2(ROWS),
  localparam int unsigned RW   = DT_W + 2 * D,
  localparam int unsigned P_W  = $clog2(D),
  localparam int unsigned L_W  = $clog2(UNITS_PER_BANK)
) (
  input  logic            clk,
  input  logic            rst_n,
  // target from the router
  input  logic            tgt_valid,
  output logic            tgt_ready,
  input  target_t         tgt,
  // time wheel
  input  logic [P_W-1:0]  p,
  input  logic            g,
  input  logic            clr_start,
  input  logic            clr_all,
  input  logic            clr_plane,
  output logic            clearing,
  input  logic            refr_en,
  // configuration of intervals
  input  logic            cfg_we,
  input  logic [U_W-1:0]  cfg_unit,
  input  logic            cfg_stage,
  input  logic [DT_W-1:0] cfg_dt,
  // unit spikes
  output logic            spk_valid,
  input  logic            spk_ready,
  output logic [U_W-1:0]  spk_unit,
  output logic            idle,
  // activity counters
  output logic [31:0]     n_sched,       // stage-1 schedules (spine 0)
  output logic [31:0]     n_match1,      // intermediate (spine-1) matches
  output logic [31:0]     n_match2,      // final-spine matches (detections)
  output logic [31:0]     n_wrap_sched,  // schedules placed in the next generation
  output logic [31:0]     n_refr,        // matches suppressed by the refractory bit
  // USM bank port
  output logic            usm_rd_en,
  output logic [RA_W-1:0] usm_rd_addr,
  input  logic [RW-1:0]   usm_rd_data,
  output logic            usm_wr_en,
  output logic [RA_W-1:0] usm_wr_addr,
  output logic [RW-1:0]   usm_wr_data,
  output logic [RW-1:0]   usm_wr_mask
);

  typedef enum logic [2:0] {UE_IDLE, UE_A, UE_B, UE_SPK, UE_CLR} ue_state_e;
  ue_state_e state;

  logic [L_W-1:0]        lu_q;            // local unit index
  logic [U_W-1:0]        unit_q;
  logic [S_W-1:0]        spine_q;
  logic [RA_W-1:0]       clr_row;
  logic                  clr_all_q, clr_plane_q;
  logic [UNITS_PER_BANK-1:0] fired;

  logic [L_W-1:0]        tgt_lu;
  logic [L_W-1:0]        cfg_lu;
  logic [DT_W-1:0]       row_dt;
  logic [P_W:0]          sum;             // p + dt with the carry (wrap) bit
  logic [P_W-1:0]        q;
  logic                  wrap;
  logic                  sched_plane;
  logic                  due;
  logic [RW-1:0]         plane_mask;

  localparam logic [S_W-1:0] S_LAST = S_W'(N_S - 1);

  // Row of stage k+1 of local unit lu.
  function automatic logic [RA_W-1:0] row_of(input logic [L_W-1:0] lu, input logic k);
    if (N_S == 3) return RA_W'({lu, k});
    else          return RA_W'(lu);
  endfunction

  function automatic int unsigned slot_bit(input logic [P_W-1:0] x, input logic b);
    return DT_W + 2 * int'(x) + int'(b);
  endfunction

  assign tgt_lu = L_W'(32'(tgt.unit) / N_UE);
  assign cfg_lu = L_W'(32'(cfg_unit) / N_UE);

  // Datapath on the row just read.
  assign row_dt      = usm_rd_data[DT_W-1:0];
  assign sum         = {1'b0, p} + (P_W+1)'(row_dt);
  assign q           = sum[P_W-1:0];            // (p + dt) mod D
  assign wrap        = sum[P_W];                // p + dt >= D
  assign sched_plane = wrap ? ~g : g;
  assign due         = usm_rd_data[slot_bit(p, g)];

  always_comb begin
    plane_mask = '0;
    for (int x = 0; x < D; x++) begin
      plane_mask[DT_W + 2*x]     = clr_all_q || !clr_plane_q;
      plane_mask[DT_W + 2*x + 1] = clr_all_q ||  clr_plane_q;
    end
  end

  assign tgt_ready = (state == UE_IDLE) && !clr_start && !cfg_we;
  assign idle      = (state == UE_IDLE);
  assign clearing  = (state == UE_CLR);
  assign spk_valid = (state == UE_SPK);
  assign spk_unit  = unit_q;

  // Memory port control.
  always_comb begin
    usm_rd_en   = 1'b0;
    usm_rd_addr = '0;
    usm_wr_en   = 1'b0;
    usm_wr_addr = '0;
    usm_wr_data = '0;
    usm_wr_mask = '0;
    unique case (state)
      UE_IDLE: begin
        if (!clr_start && cfg_we) begin
          usm_wr_en   = (N_S == 3) || !cfg_stage;       // N_S = 2 has no dt1
          usm_wr_addr = row_of(cfg_lu, cfg_stage);
          usm_wr_data = RW'(cfg_dt);
          usm_wr_mask = RW'({DT_W{1'b1}});
        end else if (!clr_start && tgt_valid) begin
          usm_rd_en   = 1'b1;
          usm_rd_addr = row_of(tgt_lu, tgt.spine == 2'd2);
        end
      end
      UE_A: begin
        unique case (spine_q)
          2'd0: begin                                   // schedule stage 1
            usm_wr_en   = 1'b1;
            usm_wr_addr = row_of(lu_q, 1'b0);
            usm_wr_data = '1;
            usm_wr_mask = RW'(1) << slot_bit(q, sched_plane);
          end
          2'd1, 2'd2: if (due) begin                    // consume the due bit
            usm_wr_en   = 1'b1;
            usm_wr_addr = row_of(lu_q, spine_q == 2'd2);
            usm_wr_data = '0;
            usm_wr_mask = RW'(1) << slot_bit(p, g);
            if (spine_q != S_LAST) begin                // fetch stage-2 row
              usm_rd_en   = 1'b1;
              usm_rd_addr = row_of(lu_q, 1'b1);
            end
          end
          default: ;
        endcase
      end
      UE_B: begin                                       // schedule stage 2
        usm_wr_en   = 1'b1;
        usm_wr_addr = row_of(lu_q, 1'b1);
        usm_wr_data = '1;
        usm_wr_mask = RW'(1) << slot_bit(q, sched_plane);
      end
      UE_CLR: begin
        usm_wr_en   = 1'b1;
        usm_wr_addr = clr_row;
        usm_wr_data = '0;
        usm_wr_mask = plane_mask;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= UE_IDLE;
      lu_q         <= '0;
      unit_q       <= '0;
      spine_q      <= '0;
      clr_row      <= '0;
      clr_all_q    <= 1'b0;
      clr_plane_q  <= 1'b0;
      fired        <= '0;
      n_sched      <= '0;
      n_match1     <= '0;
      n_match2     <= '0;
      n_wrap_sched <= '0;
      n_refr       <= '0;
    end else begin
      unique case (state)
        UE_IDLE: begin
          if (clr_start) begin
            clr_row     <= '0;
            clr_all_q   <= clr_all;
            clr_plane_q <= clr_plane;
            if (clr_all) begin
              fired        <= '0;
              n_sched      <= '0;
              n_match1     <= '0;
              n_match2     <= '0;
              n_wrap_sched <= '0;
              n_refr       <= '0;
            end
            state <= UE_CLR;
          end else if (!cfg_we && tgt_valid) begin
            lu_q    <= tgt_lu;
            unit_q  <= tgt.unit;
            spine_q <= tgt.spine;
            state   <= UE_A;
          end
        end
        UE_A: begin
          state <= UE_IDLE;
          unique case (spine_q)
            2'd0: begin
              n_sched      <= n_sched + 1;
              n_wrap_sched <= n_wrap_sched + 32'(wrap);
            end
            2'd1, 2'd2: if (due && spine_q != S_LAST) begin
              n_match1 <= n_match1 + 1;
              state    <= UE_B;
            end else if (due) begin
              n_match2 <= n_match2 + 1;
              if (refr_en && fired[lu_q]) begin
                n_refr <= n_refr + 1;
              end else begin
                fired[lu_q] <= 1'b1;
                state       <= UE_SPK;
              end
            end
            default: ;
          endcase
        end
        UE_B: begin
          n_wrap_sched <= n_wrap_sched + 32'(wrap);
          state        <= UE_IDLE;
        end
        UE_SPK: if (spk_ready) state <= UE_IDLE;
        UE_CLR: begin
          clr_row <= clr_row + 1'b1;
          if (clr_row == RA_W'(ROWS - 1)) state <= UE_IDLE;
        end
        default: state <= UE_IDLE;
      endcase
    end
  end

  // Targets name an existing spine.
  assert property (@(posedge clk) disable iff (!rst_n)
    (tgt_valid && tgt_ready) |-> (tgt.spine <= S_LAST));
  // Targets handed to this engine belong to its bank.
  assert property (@(posedge clk) disable iff (!rst_n)
    (tgt_valid && tgt_ready) |-> ((32'(tgt.unit) % N_UE) == LANE));
  // A spike stays offered until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
    (spk_valid && !spk_ready) |=> (spk_valid && $stable(spk_unit)));

endmodule
