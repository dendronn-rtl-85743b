// tb_dendronn_patterns -- directed sequence-detection cases through the whole
// accelerator.
//
// The top runs at a small size (8 units, D = 16 wheel slots, 8 channels, 10
// timestamp units per bin).  Two units are programmed:
//   unit 0: spines on channels 0, 1, 2 with dt0 = 3, dt1 = 2 bins
//   unit 1: spines on channels 3, 4, 5 with dt0 = dt1 = 0 (same-bin chain)
// Each sample plays one hand-written event pattern and the number of hidden
// spikes of each unit is compared with the expected count:
//   correct order and spacing, one early and one late middle spike, the right
//   channels in the wrong order, a correct sequence among distractors, two
//   overlapping sequences (both detected), the same with the refractory bit
//   (one detected), a sequence that crosses the wheel wrap, an expectation
//   that would only match one wheel turn too late, and the zero-interval unit
//   with its three events in and out of order within one bin.
// The decision is also checked: unit 0 votes for class 0, unit 1 for class 1.
module tb_dendronn_patterns;
  import dendronn_pkg::*;
  localparam int unsigned NU = 8, NUE = 4, D = 16, NIN = 8, NC = 2, BL = 10;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic sample_start = 1'b0;
  logic ev_valid = 1'b0, ev_ready, ev_last = 1'b0;
  logic [31:0] ev_ts = '0;
  logic [15:0] ev_addr = '0;
  logic cfg_we = 1'b0;
  cfg_sel_e cfg_sel = CFG_CHAN_PTR;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [CFG_DW-1:0] cfg_wdata = '0;
  logic mode = 1'b0, refr_en = 1'b0;
  logic [7:0] thr = 8'd100;
  logic busy, decision_valid, hs_valid;
  logic [0:0] decision;
  logic signed [7:0] u [NC];
  logic [15:0] cnt [NC];
  logic [U_W-1:0] hs_unit;
  stats_t stats;

  dendronn_top #(.N_UNITS(NU), .N_UE(NUE), .D(D), .DT_W(4), .N_IN(NIN), .CR_DEPTH(32),
                 .N_CLASSES(NC), .BIN_LEN(BL)) dut (
    .clk, .rst_n, .sample_start, .ev_valid, .ev_ready, .ev_ts, .ev_addr, .ev_last,
    .cfg_we, .cfg_sel, .cfg_addr, .cfg_wdata, .mode, .thr, .refr_en,
    .busy, .decision_valid, .decision, .u, .cnt, .hs_valid, .hs_unit, .stats);

  int seen [NU];
  always @(negedge clk) if (rst_n && hs_valid) seen[hs_unit]++;

  task automatic cfg_write(cfg_sel_e sel, int addr, logic [CFG_DW-1:0] data);
    @(negedge clk);
    cfg_we = 1'b1; cfg_sel = sel; cfg_addr = CFG_AW'(addr); cfg_wdata = data;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  // one list word per channel 0..5 with a single target; channels 6, 7 empty
  task automatic load_network();
    for (int c = 0; c <= NIN; c++) cfg_write(CFG_CHAN_PTR, c, CFG_DW'((c < 6) ? c : 6));
    for (int c = 0; c < 6; c++) begin
      target_t tg;
      logic [CFG_DW-1:0] w;
      w = '0;
      tg.valid = 1'b1; tg.unit = U_W'(c / 3); tg.spine = S_W'(c % 3);
      w[(c / 3) * TGT_W +: TGT_W] = tg;       // unit 0 is in lane 0, unit 1 in lane 1
      cfg_write(CFG_CONN, c, w);
    end
    cfg_write(CFG_USM_DT, 0, CFG_DW'(3));     // unit 0, dt0
    cfg_write(CFG_USM_DT, 1, CFG_DW'(2));     // unit 0, dt1
    cfg_write(CFG_USM_DT, 2, CFG_DW'(0));     // unit 1, dt0
    cfg_write(CFG_USM_DT, 3, CFG_DW'(0));     // unit 1, dt1
    for (int x = 0; x < NU; x++) cfg_write(CFG_OUT_W, x, CFG_DW'((x == 0) ? 16'h0032 : (x == 1) ? 16'h3200 : 16'h0000));
  endtask

  // events given as bin * 10 + channel, in time order
  task automatic run(string name, int evs [$], bit refr, int exp0, int exp1);
    for (int x = 0; x < NU; x++) seen[x] = 0;
    refr_en = refr;
    @(negedge clk) sample_start = 1'b1;
    @(negedge clk) sample_start = 1'b0;
    for (int e = 0; e < evs.size(); e++) begin
      forever begin
        @(negedge clk);
        ev_valid = 1'b1; ev_ts = 32'((evs[e] / 10) * BL + e % BL); ev_addr = 16'(evs[e] % 10);
        ev_last = (e == evs.size() - 1);
        #1;
        if (ev_ready) begin @(posedge clk); break; end
      end
    end
    @(negedge clk) ev_valid = 1'b0; ev_last = 1'b0;
    while (!decision_valid) @(negedge clk);
    checks += 2;
    if (seen[0] != exp0 || seen[1] != exp1) begin
      failures++; $display("FAIL: %s: unit spikes %0d/%0d expected %0d/%0d", name, seen[0], seen[1], exp0, exp1);
    end else $display("%-34s unit 0: %0d  unit 1: %0d", name, seen[0], seen[1]);
    if ((exp0 != exp1) && (int'(decision) != ((exp1 > exp0) ? 1 : 0))) begin
      failures++; $display("FAIL: %s: decision %0d", name, decision);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_network();
    run("in order, exact spacing",         '{10, 41, 62},                     1'b0, 1, 0);
    run("middle spike one bin early",      '{10, 31, 62},                     1'b0, 0, 0);
    run("last spike one bin late",         '{10, 41, 72},                     1'b0, 0, 0);
    run("right channels, wrong order",     '{12, 41, 70},                     1'b0, 0, 0);
    run("sequence among distractors",      '{12, 20, 31, 51, 62, 71, 72, 82}, 1'b0, 1, 0);
    run("two overlapping sequences",       '{10, 20, 41, 51, 62, 72},         1'b0, 2, 0);
    run("overlapping, refractory",         '{10, 20, 41, 51, 62, 72},         1'b1, 1, 0);
    run("across the wheel wrap",           '{140, 171, 192},                  1'b0, 1, 0);
    run("one wheel turn too late",         '{10, 201, 222},                   1'b0, 0, 0);
    run("dt = 0, same bin, in order",      '{23, 24, 25},                     1'b0, 0, 1);
    run("dt = 0, same bin, reversed",      '{25, 24, 23},                     1'b0, 0, 0);
    run("dt = 0, spread over two bins",    '{23, 24, 35},                     1'b0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
