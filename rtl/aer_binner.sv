// aer_binner -- address-event receiver and time binner.
//
// Sensor events arrive as (timestamp, address) pairs, in timestamp order, with
// the timestamp counted from the start of the sample.  The block keeps the end
// of the current time bin (bin_end) and the bin index t.  An event whose
// timestamp lies past bin_end first makes the block request one time-wheel tick
// per bin boundary crossed (tick_req / tick_ack); only then is the event passed
// on as the tuple (t, c).  A tick is requested only once every earlier event
// has left the output register, so the router has received all events of bin t
// before the wheel moves on.  The address is decoded into a channel index: an
// address below N_IN is the channel itself, any other address is dropped and
// counted.  ev_last marks the last event of a sample; eos pulses once that
// event has been handed on (or dropped).
//
// Binning into (t, c) tuples and the 8 ms bin length (BIN_LEN = 8000 with
// microsecond timestamps) follow the paper.  The comparison-based binning, the
// address decode and the ev_last marker are this design's choices; the paper's
// clockless handshake stage is replaced by a valid/ready register.
//
// Timing: one event per cycle when no tick is needed; each tick costs the
// tick_req/tick_ack round trip.  sample_start resets t, bin_end and the drop
// counter.
module aer_binner #(
  parameter int unsigned TS_W    = 32,
  parameter int unsigned BIN_LEN = 8000,
  parameter int unsigned N_IN    = 1024,
  parameter int unsigned T_W     = 16,
  parameter int unsigned A_W     = 16,
  localparam int unsigned C_W    = $clog2(N_IN)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            sample_start,
  // sensor side
  input  logic            ev_valid,
  output logic            ev_ready,
  input  logic [TS_W-1:0] ev_ts,
  input  logic [A_W-1:0]  ev_addr,
  input  logic            ev_last,
  // time wheel
  output logic            tick_req,
  input  logic            tick_ack,
  // binned events to the router
  output logic            out_valid,
  input  logic            out_ready,
  output logic [T_W-1:0]  out_t,
  output logic [C_W-1:0]  out_c,
  output logic            eos,
  output logic [15:0]     dropped
);

  logic [TS_W:0]  bin_end;     // one extra bit so the boundary never wraps
  logic [T_W-1:0] t_cur;
  logic           eos_pend;
  logic           need_tick;
  logic           accept;
  logic           in_range;

  assign need_tick = ev_valid && ({1'b0, ev_ts} >= bin_end);
  assign tick_req  = need_tick && !out_valid && !sample_start;
  assign accept    = ev_valid && !need_tick && (!out_valid || out_ready) && !sample_start;
  assign ev_ready  = accept;
  assign in_range  = ({{(32-A_W){1'b0}}, ev_addr} < N_IN);
  assign eos       = eos_pend && !out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bin_end   <= (TS_W+1)'(BIN_LEN);
      t_cur     <= '0;
      out_valid <= 1'b0;
      out_t     <= '0;
      out_c     <= '0;
      eos_pend  <= 1'b0;
      dropped   <= '0;
    end else if (sample_start) begin
      bin_end   <= (TS_W+1)'(BIN_LEN);
      t_cur     <= '0;
      out_valid <= 1'b0;
      eos_pend  <= 1'b0;
      dropped   <= '0;
    end else begin
      if (tick_ack) begin
        t_cur   <= t_cur + 1'b1;
        bin_end <= bin_end + (TS_W+1)'(BIN_LEN);
      end
      if (eos) eos_pend <= 1'b0;
      if (accept) begin
        out_valid <= in_range;
        out_t     <= t_cur;
        out_c     <= C_W'(ev_addr);
        if (!in_range) dropped <= dropped + 1'b1;
        if (ev_last) eos_pend <= 1'b1;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  // A tick must only be granted when it was asked for.
  assert property (@(posedge clk) disable iff (!rst_n) tick_ack |-> tick_req);

endmodule
