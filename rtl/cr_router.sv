// cr_router -- connectivity router: per-channel adjacency lists in SRAM.
//
// Hidden-layer connectivity is binary and very sparse (one input per spine), so
// it is stored as adjacency lists.  chan_ptr[c] .. chan_ptr[c+1]-1 is the range
// of conn_list words that belong to input channel c.  Each conn_list word holds
// N_UE targets <u,s>, one per lane; lane i may only name units of bank i
// (u mod N_UE == i) and may be empty (valid bit 0).  For an event on channel c
// the router reads chan_ptr[c] and chan_ptr[c+1] (two cycles, one memory port),
// then streams the words of that range.  Every valid lane of a word is offered
// to its update engine with its own valid/ready pair; the next word is read once
// all lanes of the current one have been taken.  Channels with no targets cost
// only the two pointer reads.  Only units connected to the spiking channel are
// ever touched.
//
// The chan_ptr / conn_list organisation and the four targets per word follow
// the paper.  The half-open range convention, the lane-per-bank packing, the
// word layout {valid, u, s} and the sequential pointer reads are this design's
// choices.  Both memories are written through cfg_*; the host fills them before
// a sample.
//
// Timing: 2 cycles for the pointers, then 2 cycles per word plus any cycles the
// engines hold ready low.  clear zeroes the word counter (statistics only).
// busy is high from acceptance of an event until its
// last target has been taken.
module cr_router import dendronn_pkg::*; #(
  parameter int unsigned N_IN     = 1024,
  parameter int unsigned CR_DEPTH = 4096,
  parameter int unsigned N_UE     = 4,
  localparam int unsigned C_W     = $clog2(N_IN),
  localparam int unsigned A_W     = $clog2(CR_DEPTH),
  localparam int unsigned PTR_W   = $clog2(CR_DEPTH + 1),
  localparam int unsigned WORD_W  = N_UE * TGT_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,      // sample start: zero the word counter
  // channel events
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [C_W-1:0]    in_c,
  // targets, one lane per update engine
  output logic [N_UE-1:0]   tgt_valid,
  input  logic [N_UE-1:0]   tgt_ready,
  output target_t           tgt [N_UE],
  // configuration
  input  logic              cfg_ptr_we,
  input  logic              cfg_conn_we,
  input  logic [CFG_AW-1:0] cfg_addr,
  input  logic [CFG_DW-1:0] cfg_wdata,
  output logic              busy,
  output logic [31:0]       n_words
);

  // Memories.
  logic [PTR_W-1:0]  chan_ptr  [N_IN + 1];
  logic [WORD_W-1:0] conn_list [CR_DEPTH];

  typedef enum logic [2:0] {CR_IDLE, CR_P0, CR_P1, CR_RD, CR_HOLD} cr_state_e;
  cr_state_e state;

  logic [C_W:0]      ptr_addr;
  logic [PTR_W-1:0]  ptr_q;
  logic [PTR_W-1:0]  cur, last;
  logic [C_W-1:0]    chan_q;
  logic [WORD_W-1:0] word_q;
  logic [N_UE-1:0]   taken;       // lanes of word_q already handed over
  logic [N_UE-1:0]   taken_next;
  logic [N_UE-1:0]   lane_has;    // lanes of word_q that carry a target

  // chan_ptr read port: address c while idle, c+1 in P0.
  assign ptr_addr = (state == CR_IDLE) ? {1'b0, in_c} : ({1'b0, chan_q} + 1'b1);

  always_ff @(posedge clk) begin
    if (cfg_ptr_we) chan_ptr[cfg_addr[C_W:0]] <= cfg_wdata[PTR_W-1:0];
    ptr_q <= chan_ptr[ptr_addr];
  end

  always_ff @(posedge clk) begin
    if (cfg_conn_we)       conn_list[cfg_addr[A_W-1:0]] <= cfg_wdata[WORD_W-1:0];
    if (state == CR_RD)    word_q <= conn_list[cur[A_W-1:0]];
  end

  assign in_ready = (state == CR_IDLE);
  assign busy     = (state != CR_IDLE);

  always_comb begin
    for (int i = 0; i < N_UE; i++) begin
      tgt[i]       = word_q[i*TGT_W +: TGT_W];
      lane_has[i]  = tgt[i].valid;
      tgt_valid[i] = (state == CR_HOLD) && lane_has[i] && !taken[i];
    end
    taken_next = taken | (tgt_valid & tgt_ready);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= CR_IDLE;
      chan_q  <= '0;
      cur     <= '0;
      last    <= '0;
      taken   <= '0;
      n_words <= '0;
    end else begin
      if (clear) n_words <= '0;
      unique case (state)
        CR_IDLE: if (in_valid) begin
          chan_q <= in_c;
          state  <= CR_P0;                    // chan_ptr[c] is being read
        end
        CR_P0: begin
          cur   <= ptr_q;                     // start of the list
          state <= CR_P1;                     // chan_ptr[c+1] is being read
        end
        CR_P1: begin
          last  <= ptr_q;                     // one past the end
          state <= (cur == ptr_q) ? CR_IDLE : CR_RD;
        end
        CR_RD: begin                          // word_q loads at this edge
          taken   <= '0;
          n_words <= clear ? '0 : n_words + 1;
          state   <= CR_HOLD;
        end
        CR_HOLD: begin
          taken <= taken_next;
          if ((taken_next & lane_has) == lane_has) begin
            cur   <= cur + 1'b1;
            state <= ((cur + 1'b1) == last) ? CR_IDLE : CR_RD;
          end
        end
        default: state <= CR_IDLE;
      endcase
    end
  end

  // A lane may only carry units of its own bank.
  for (genvar i = 0; i < N_UE; i++) begin : g_lane_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      tgt_valid[i] |-> ((32'(tgt[i].unit) % N_UE) == i));
    // valid stays up until the engine takes the target
    assert property (@(posedge clk) disable iff (!rst_n)
      (tgt_valid[i] && !tgt_ready[i]) |=> tgt_valid[i]);
  end

endmodule
