// time_wheel -- global wheel pointer, generation phase and plane clearing.
//
// The unit-state memory keeps expectations in a circular wheel of D slots.  This
// block owns the wheel pointer p, advanced once per time bin as
// p <- (p + 1) mod D, and the phase bit g that says which of the two packed
// bit-planes of every slot holds the current wheel generation.  When p wraps
// from D-1 to 0 the phase toggles, so the old "next" plane becomes current, and
// the plane that will now collect next-generation schedules (the old current
// plane, full of expired expectations) is cleared in every USM row.  The clear
// is one sweep over all rows, started with a clr_start pulse and finished when
// no update engine reports `clearing`; event processing waits for it.  This
// spends the clearing work once per D ticks.  sample_start resets p and g and
// clears both planes of every row.
//
// A tick is granted (tick_ack, one cycle) only when the AER asks for it and the
// router and all update engines are idle (pipe_idle), so every event of a bin
// is handled with the same p.
//
// The pointer update, the phase toggle on wrap and the reset of the reused
// plane follow the paper; doing the reset as a stalling sweep right after the
// wrap, and the sample-start clear, are this design's choices.  D must be a
// power of two so that "mod D" is the low log2(D) bits of the sum.
module time_wheel #(
  parameter int unsigned D   = 256,
  localparam int unsigned P_W = $clog2(D)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           sample_start,
  input  logic           tick_req,
  output logic           tick_ack,
  input  logic           pipe_idle,
  output logic [P_W-1:0] p,
  output logic           g,
  // clear command to the update engines
  output logic           clr_start,
  output logic           clr_all,
  output logic           clr_plane,
  input  logic           clr_busy,     // OR of the engines' clearing flags
  output logic           busy,
  output logic [15:0]    n_wraps,
  output logic [31:0]    n_ticks
);

  typedef enum logic [1:0] {TW_IDLE, TW_START, TW_WAIT} tw_state_e;
  tw_state_e state;

  assign busy     = (state != TW_IDLE);
  assign tick_ack = (state == TW_IDLE) && tick_req && pipe_idle && !sample_start;
  assign clr_start = (state == TW_START);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= TW_IDLE;
      p         <= '0;
      g         <= 1'b0;
      clr_all   <= 1'b0;
      clr_plane <= 1'b0;
      n_wraps   <= '0;
      n_ticks   <= '0;
    end else if (sample_start) begin
      state     <= TW_START;
      p         <= '0;
      g         <= 1'b0;
      clr_all   <= 1'b1;
      clr_plane <= 1'b0;
      n_wraps   <= '0;
      n_ticks   <= '0;
    end else begin
      unique case (state)
        TW_IDLE: if (tick_ack) begin
          p       <= p + 1'b1;               // (p + 1) mod D
          n_ticks <= n_ticks + 1;
          if (p == P_W'(D - 1)) begin
            g         <= ~g;                 // swap current and next generation
            clr_plane <= g;                  // old current plane is reused as next
            clr_all   <= 1'b0;
            n_wraps   <= n_wraps + 1'b1;
            state     <= TW_START;
          end
        end
        TW_START: state <= TW_WAIT;
        TW_WAIT:  if (!clr_busy) state <= TW_IDLE;
        default:  state <= TW_IDLE;
      endcase
    end
  end

  initial assert (D == (1 << P_W)) else $error("time_wheel: D must be a power of two");

endmodule
