// usm_bank -- one bank of the Unit-State Memory (USM).
//
// Each hidden unit owns two rows, one per state stage: row 2*lu holds stage 1
// ("expect spine 1", written by spine-0 events) and row 2*lu+1 holds stage 2
// ("expect spine 2").  A row is one wide word:
//
//   bits [DT_W-1:0]          inter-spike interval of the stage (dt0 or dt1)
//   bit  DT_W + 2*x + b      slot x of the wheel, generation plane b (b = 0, 1)
//
// so a row is DT_W + 2*D bits (520 for D = 256).  The layout "interval, then
// the D packed two-bit slots" is the one the paper draws for the USM; the bit
// order is this design's choice.  The bank has a synchronous read port (data
// one cycle after rd_en) and a write port with a per-bit mask, so the update
// engine can change single slots, a whole plane or only the interval field.
// It is a plain array and maps onto an SRAM macro with bit-write enables.
// Nothing is reset: the intervals are written by configuration and the slot
// bits by the sample-start clear.
module usm_bank #(
  parameter int unsigned ROWS = 1500,
  parameter int unsigned D    = 256,
  parameter int unsigned DT_W = 8,
  localparam int unsigned RW  = DT_W + 2 * D,
  localparam int unsigned RA_W = $clog2(ROWS)
) (
  input  logic            clk,
  input  logic            rd_en,
  input  logic [RA_W-1:0] rd_addr,
  output logic [RW-1:0]   rd_data,
  input  logic            wr_en,
  input  logic [RA_W-1:0] wr_addr,
  input  logic [RW-1:0]   wr_data,
  input  logic [RW-1:0]   wr_mask
);

  logic [RW-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int b = 0; b < RW; b++) begin
        if (wr_mask[b]) mem[wr_addr][b] <= wr_data[b];
      end
    end
  end

endmodule
