// tb_cr_router -- self-checking test of the connectivity router.
//
// A random sparse network (N_IN = 16 channels, lists of 0..5 words, lanes left
// empty at random, lane i holding only units of bank i) is written into
// chan_ptr and conn_list.  Random channel events are sent while the four lanes
// apply random back-pressure.  Every target that leaves a lane is compared, in
// order, with the list the testbench built; the word counter and the busy flag
// are checked too, and the pointer-read latency of an empty channel.
module tb_cr_router;
  import dendronn_pkg::*;
  localparam int unsigned N_IN = 16;
  localparam int unsigned DEPTH = 128;
  localparam int unsigned N_UE = 4;
  localparam int unsigned C_W = $clog2(N_IN);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 1'b0, in_ready;
  logic [C_W-1:0] in_c = '0;
  logic [N_UE-1:0] tgt_valid, tgt_ready = '0;
  target_t tgt [N_UE];
  logic cfg_ptr_we = 1'b0, cfg_conn_we = 1'b0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [CFG_DW-1:0] cfg_wdata = '0;
  logic busy;
  logic [31:0] n_words;

  cr_router #(.N_IN(N_IN), .CR_DEPTH(DEPTH), .N_UE(N_UE)) dut (.clk, .rst_n, .clear (1'b0), .in_valid, .in_ready,
    .in_c, .tgt_valid, .tgt_ready, .tgt, .cfg_ptr_we, .cfg_conn_we, .cfg_addr, .cfg_wdata, .busy, .n_words);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  target_t words [DEPTH][N_UE];
  int ptr [N_IN + 1];
  target_t exp_q [N_UE][$];
  int exp_words = 0;

  always @(negedge clk) for (int i = 0; i < N_UE; i++) tgt_ready[i] <= ($urandom_range(0, 2) != 0);

  always @(posedge clk) if (rst_n) for (int i = 0; i < N_UE; i++) if (tgt_valid[i] && tgt_ready[i]) begin
    checks++;
    if (exp_q[i].size() == 0) begin failures++; $display("FAIL: lane %0d unexpected target", i); end
    else begin
      automatic target_t e = exp_q[i].pop_front();
      if (tgt[i] != e) begin
        failures++; $display("FAIL: lane %0d got u=%0d s=%0d expected u=%0d s=%0d", i, tgt[i].unit, tgt[i].spine, e.unit, e.spine);
      end
    end
  end

  task automatic cfg(bit is_ptr, int addr, logic [CFG_DW-1:0] data);
    @(negedge clk);
    cfg_ptr_we = is_ptr; cfg_conn_we = !is_ptr; cfg_addr = CFG_AW'(addr); cfg_wdata = data;
    @(negedge clk);
    cfg_ptr_we = 1'b0; cfg_conn_we = 1'b0;
  endtask

  initial begin
    int w = 0;
    int cyc;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // build the lists
    for (int c = 0; c < N_IN; c++) begin
      automatic int nw = (c == 3) ? 0 : $urandom_range(0, 5);
      ptr[c] = w;
      for (int k = 0; k < nw; k++) begin
        automatic logic [CFG_DW-1:0] data = '0;
        for (int i = 0; i < N_UE; i++) begin
          automatic bit v = (k == 0 && i == 0) || ($urandom_range(0, 3) != 0);
          words[w][i] = '{valid: v, unit: U_W'($urandom_range(0, 200) * N_UE + i), spine: S_W'($urandom_range(0, 2))};
          data[i*TGT_W +: TGT_W] = words[w][i];
        end
        cfg(1'b0, w, data);
        w++;
      end
    end
    ptr[N_IN] = w;
    for (int c = 0; c <= N_IN; c++) cfg(1'b1, c, CFG_DW'(ptr[c]));

    // empty channel: only the two pointer reads
    @(negedge clk);
    in_valid = 1'b1; in_c = C_W'(3);
    @(negedge clk);
    in_valid = 1'b0;
    cyc = 1;
    while (busy) begin @(negedge clk); cyc++; end
    check(cyc == 3, $sformatf("empty channel takes 2 busy cycles (%0d)", cyc - 1));

    for (int n = 0; n < 200; n++) begin
      automatic int c = $urandom_range(0, N_IN - 1);
      for (int k = ptr[c]; k < ptr[c + 1]; k++) begin
        exp_words++;
        for (int i = 0; i < N_UE; i++) if (words[k][i].valid) exp_q[i].push_back(words[k][i]);
      end
      @(negedge clk);
      in_valid = 1'b1; in_c = C_W'(c);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      in_valid = 1'b0;
      if ($urandom_range(0, 1)) while (busy) @(negedge clk);
    end
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    for (int i = 0; i < N_UE; i++) check(exp_q[i].size() == 0, $sformatf("lane %0d: %0d targets missing", i, exp_q[i].size()));
    check(n_words == 32'(exp_words), $sformatf("words %0d expected %0d", n_words, exp_words));
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
