// tb_out_weight_sram -- self-checking test of the output weight memory.
//
// Every row of a small memory (40 units, 5 classes) is written with random
// int8 weights, then random rows are read back and compared one cycle after
// the read; rewrites between reads check that a row takes its latest value.
module tb_out_weight_sram;
  import dendronn_pkg::*;
  localparam int unsigned N_UNITS = 40, N_CLASSES = 5;
  localparam int unsigned RW = N_CLASSES * W_W;
  localparam int unsigned A_W = $clog2(N_UNITS);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rd_en = 1'b0, wr_en = 1'b0;
  logic [A_W-1:0] rd_addr = '0, wr_addr = '0;
  logic [RW-1:0] rd_data, wr_data = '0;
  logic [RW-1:0] model [N_UNITS];

  out_weight_sram #(.N_UNITS(N_UNITS), .N_CLASSES(N_CLASSES)) dut (.clk, .rd_en, .rd_addr, .rd_data,
    .wr_en, .wr_addr, .wr_data);

  initial begin
    for (int r = 0; r < N_UNITS; r++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_addr = A_W'(r); wr_data = RW'({$urandom, $urandom});
      model[r] = wr_data;
    end
    @(negedge clk) wr_en = 1'b0;
    for (int n = 0; n < 500; n++) begin
      automatic int r = $urandom_range(0, N_UNITS - 1);
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) begin
        wr_en = 1'b1; wr_addr = A_W'($urandom_range(0, N_UNITS - 1)); wr_data = RW'({$urandom, $urandom});
        model[wr_addr] = wr_data;
        @(negedge clk) wr_en = 1'b0;
      end
      rd_en = 1'b1; rd_addr = A_W'(r);
      @(negedge clk) rd_en = 1'b0;
      checks++;
      if (rd_data !== model[r]) begin failures++; $display("FAIL: row %0d %h vs %h", r, rd_data, model[r]); end
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
