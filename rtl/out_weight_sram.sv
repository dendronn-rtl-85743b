// out_weight_sram -- output-layer weight memory.
//
// One row per hidden unit holds that unit's int8 weights to all N_CLASSES
// output neurons, packed with class j in bits [j*W_W +: W_W].  A hidden spike
// reads its row in one access (synchronous read, data one cycle after rd_en),
// so the output neurons are all updated together.  Pruned weights are simply
// stored as zero; the dense layout is this design's choice, the int8 width is
// the paper's.  Rows are written through the configuration port.
module out_weight_sram import dendronn_pkg::*; #(
  parameter int unsigned N_UNITS   = 3000,
  parameter int unsigned N_CLASSES = 20,
  localparam int unsigned RW  = N_CLASSES * W_W,
  localparam int unsigned A_W = $clog2(N_UNITS)
) (
  input  logic           clk,
  input  logic           rd_en,
  input  logic [A_W-1:0] rd_addr,
  output logic [RW-1:0]  rd_data,
  input  logic           wr_en,
  input  logic [A_W-1:0] wr_addr,
  input  logic [RW-1:0]  wr_data
);

  logic [RW-1:0] mem [N_UNITS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
