// tb_usm_bank -- self-checking test of one USM bank.
//
// Random bit-masked writes (single slot bits, whole planes, interval fields,
// random masks) are mirrored in a testbench array; random reads are compared
// with the mirror one cycle after the read is issued.  Small size: 12 rows,
// D = 16, 4-bit intervals.
module tb_usm_bank;
  localparam int unsigned ROWS = 12, D = 16, DT_W = 4;
  localparam int unsigned RW = DT_W + 2 * D;
  localparam int unsigned RA_W = $clog2(ROWS);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rd_en = 1'b0, wr_en = 1'b0;
  logic [RA_W-1:0] rd_addr = '0, wr_addr = '0;
  logic [RW-1:0] rd_data, wr_data = '0, wr_mask = '0;
  logic [RW-1:0] model [ROWS];

  usm_bank #(.ROWS(ROWS), .D(D), .DT_W(DT_W)) dut (.clk, .rd_en, .rd_addr, .rd_data, .wr_en,
    .wr_addr, .wr_data, .wr_mask);

  initial begin
    // initialise every row with full writes
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_addr = RA_W'(r); wr_mask = '1;
      wr_data = {$urandom, $urandom};
      model[r] = wr_data;
    end
    @(negedge clk) wr_en = 1'b0;
    for (int n = 0; n < 2000; n++) begin
      automatic int kind = $urandom_range(0, 3);
      automatic logic [RW-1:0] pend_exp;
      automatic logic [RA_W-1:0] ra;
      @(negedge clk);
      wr_en = ($urandom_range(0, 1) != 0);
      wr_addr = RA_W'($urandom_range(0, ROWS - 1));
      wr_data = {$urandom, $urandom};
      case (kind)
        0: wr_mask = RW'(1) << (DT_W + $urandom_range(0, 2 * D - 1));
        1: begin
          wr_mask = '0;
          for (int x = 0; x < D; x++) wr_mask[DT_W + 2 * x + 1] = 1'b1;
        end
        2: wr_mask = RW'({DT_W{1'b1}});
        default: wr_mask = {$urandom, $urandom};
      endcase
      rd_en = ($urandom_range(0, 1) != 0);
      ra = RA_W'($urandom_range(0, ROWS - 1));
      rd_addr = ra;
      pend_exp = model[ra];           // read sees the old contents
      if (wr_en) model[wr_addr] = (model[wr_addr] & ~wr_mask) | (wr_data & wr_mask);
      if (rd_en) begin
        @(negedge clk);
        wr_en = 1'b0; rd_en = 1'b0;
        checks++;
        if (rd_data !== pend_exp) begin
          failures++;
          $display("FAIL: row %0d read %h expected %h", ra, rd_data, pend_exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
