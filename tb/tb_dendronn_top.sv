// tb_dendronn_top -- end-to-end test of the accelerator at reduced size.
//
// 32 hidden units in 4 banks, a wheel of D = 16 slots, 16 input channels,
// 4 classes, 10 timestamp units per bin, 60 bins per sample (several wheel
// wraps) and 8 samples.
//
// The testbench draws a random network: every hidden unit gets one input
// channel per spine (one channel is left without targets), two intervals
// dt0, dt1 >= 1 bin (mostly short, sometimes up to D-1) and a row of int8
// output weights.  It writes the adjacency lists, the intervals and the
// weights through the configuration port, then runs samples of random events
// (a few bins left empty, a few addresses outside the channel range).
// Samples alternate between spike-count and potential decision mode and
// switch the refractory bit on and off.
//
// Reference: an event-level model keeps every pending expectation as the
// absolute bin it is due in (not as a wheel slot), so it checks the wheel's
// modulo arithmetic, the generation planes and their clearing independently.
// With intervals of at least one bin the result does not depend on the order
// in which targets of one bin are handled.  The number of spikes of every
// hidden unit, the statistics counters (ticks, wraps, schedules, schedules
// into the next generation, matches, refractory suppressions, router words,
// dropped events, hidden and output spikes) and the final potentials, counts
// and decision are compared with the model.  The output layer is modelled in
// the order in which hidden spikes leave the merge, as the hardware sees them.
//
// At the end it prints how often each mechanism happened -- ticks, multi-bin
// gaps, wraps, clear sweeps, next-generation schedules, spine-1 and spine-2
// matches, refractory suppression, router lane stalls, merge conflicts,
// dropped addresses, empty channels, output spikes, saturation and both
// decision modes -- and counts a failure for any that never did.
module tb_dendronn_top;
  localparam int unsigned NU = 32, NUE = 4, D = 16, DT_W = 4, NIN = 16, CRD = 128, NC = 4, BL = 10;
  localparam int unsigned NBINS = 60, P_FIRE = 350, DT_SMALL = 4, N_SAMPLES = 8;
  localparam int unsigned WATCHDOG = 2000000;
  localparam int unsigned NSP = 3;
  localparam bit BALANCED = 1'b0, MECH_REQUIRED = 1'b1;
  import dendronn_pkg::*;
  localparam int unsigned K_W = (NC > 1) ? $clog2(NC) : 1;
  localparam int unsigned TGT_TOT = 3 * NU;

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
  logic mode = 1'b1, refr_en = 1'b0;
  logic [7:0] thr = 8'd40;
  logic busy, decision_valid, hs_valid;
  logic [K_W-1:0] decision;
  logic signed [7:0] u [NC];
  logic [15:0] cnt [NC];
  logic [U_W-1:0] hs_unit;
  stats_t stats;

  // ---------------- network description ----------------
  int chan [NU][3];          // input channel of each spine
  int dt [NU][2];            // dt0, dt1 in bins
  int wt [NU][NC];           // output weights
  int lane_n [NIN][NUE];     // targets per (channel, lane)
  int lane_u [NIN][NUE][$];  // unit of each target
  int lane_s [NIN][NUE][$];  // spine of each target
  int nwords [NIN];

  // ---------------- per-sample model state ----------------
  bit exp1 [int];            // key u * 2^20 + absolute bin
  bit exp2 [int];
  bit fired [NU];
  int hid_model [NU], hid_seen [NU];
  int m_sched, m_wrap, m_m1, m_m2, m_refr, m_words, m_drop, m_ticks;
  int ou [NC], oc [NC];
  int m_hidden, m_outspk;

  // ---------------- mechanism counters ----------------
  int mech_multitick = 0, mech_empty_chan = 0, mech_sat = 0, mech_mode0 = 0, mech_mode1 = 0;
  int mech_refr = 0, mech_wraps = 0, mech_clr = 0, mech_wrap_sched = 0, mech_stall = 0;
  int mech_conf = 0, mech_drop = 0, mech_m1 = 0, mech_m2 = 0, mech_outspk = 0;

  dendronn_top #(.N_UNITS(NU), .N_UE(NUE), .D(D), .DT_W(DT_W), .N_IN(NIN), .CR_DEPTH(CRD), .N_CLASSES(NC), .BIN_LEN(BL)) dut (
    .clk, .rst_n, .sample_start, .ev_valid, .ev_ready, .ev_ts, .ev_addr, .ev_last,
    .cfg_we, .cfg_sel, .cfg_addr, .cfg_wdata, .mode, .thr, .refr_en,
    .busy, .decision_valid, .decision, .u, .cnt, .hs_valid, .hs_unit, .stats);

  task automatic cfg_write(cfg_sel_e sel, int addr, logic [CFG_DW-1:0] data);
    @(negedge clk);
    cfg_we = 1'b1; cfg_sel = sel; cfg_addr = CFG_AW'(addr); cfg_wdata = data;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  task automatic build_network();
    int ptr;
    int rot [NUE];
    for (int i = 0; i < NUE; i++) rot[i] = $urandom_range(0, NIN - 2);
    for (int c = 0; c < NIN; c++) for (int i = 0; i < NUE; i++) lane_n[c][i] = 0;
    for (int x = 0; x < NU; x++) begin
      for (int s = 0; s < NSP; s++) begin
        // the last channel is left without targets
        chan[x][s] = BALANCED ? ((((x / NUE) * 3 + s) * 7 + rot[x % NUE]) % (NIN - 1))
                              : $urandom_range(0, NIN - 2);
        lane_u[chan[x][s]][x % NUE].push_back(x);
        lane_s[chan[x][s]][x % NUE].push_back(s);
        lane_n[chan[x][s]][x % NUE]++;
      end
      for (int k = 0; k < 2; k++)
        dt[x][k] = ($urandom_range(0, 9) == 0) ? $urandom_range(1, D - 1) : $urandom_range(1, DT_SMALL);
      for (int j = 0; j < NC; j++) wt[x][j] = $urandom_range(0, 100) - 45;
    end
    ptr = 0;
    for (int c = 0; c < NIN; c++) begin
      nwords[c] = 0;
      for (int i = 0; i < NUE; i++) if (lane_n[c][i] > nwords[c]) nwords[c] = lane_n[c][i];
      cfg_write(CFG_CHAN_PTR, c, CFG_DW'(ptr));
      for (int w = 0; w < nwords[c]; w++) begin
        logic [CFG_DW-1:0] word;
        word = '0;
        for (int i = 0; i < NUE; i++) if (w < lane_n[c][i]) begin
          target_t tg;
          tg.valid = 1'b1; tg.unit = U_W'(lane_u[c][i][w]); tg.spine = S_W'(lane_s[c][i][w]);
          word[i*TGT_W +: TGT_W] = tg;
        end
        cfg_write(CFG_CONN, ptr + w, word);
      end
      ptr += nwords[c];
    end
    cfg_write(CFG_CHAN_PTR, NIN, CFG_DW'(ptr));
    if (ptr > CRD) begin failures++; $display("FAIL: adjacency lists need %0d words", ptr); end
    for (int x = 0; x < NU; x++) begin
      for (int k = 0; k < NSP - 1; k++) cfg_write(CFG_USM_DT, 2 * x + k, CFG_DW'(dt[x][k]));
      begin
        logic [CFG_DW-1:0] row;
        row = '0;
        for (int j = 0; j < NC; j++) row[j*8 +: 8] = 8'(wt[x][j]);
        cfg_write(CFG_OUT_W, x, row);
      end
    end
  endtask

  // model of one schedule: returns 1 if it lands in the next wheel generation
  function automatic int wraps_over(int bin, int d);
    return ((bin % D) + d >= D) ? 1 : 0;
  endfunction

  task automatic model_event(int bin, int c);
    m_words += nwords[c];
    if (nwords[c] == 0) mech_empty_chan++;
    for (int i = 0; i < NUE; i++) for (int k = 0; k < lane_n[c][i]; k++) begin
      automatic int x = lane_u[c][i][k];
      automatic int s = lane_s[c][i][k];
      automatic int key = x * (1 << 13) + bin;
      if (s == 0) begin
        m_sched++;
        m_wrap += wraps_over(bin, dt[x][0]);
        exp1[x * (1 << 13) + bin + dt[x][0]] = 1'b1;
      end else if (s == 1 && NSP == 3) begin
        if (exp1.exists(key)) begin
          exp1.delete(key);
          m_m1++;
          m_wrap += wraps_over(bin, dt[x][1]);
          exp2[x * (1 << 13) + bin + dt[x][1]] = 1'b1;
        end
      end else begin
        // final spine: stage 2 for three spines, stage 1 for two
        automatic bit hit = (NSP == 3) ? exp2.exists(key) : exp1.exists(key);
        if (hit) begin
          if (NSP == 3) exp2.delete(key); else exp1.delete(key);
          m_m2++;
          if (refr_en && fired[x]) m_refr++;
          else begin fired[x] = 1'b1; hid_model[x]++; end
        end
      end
    end
  endtask

  // output layer fed in the order the hidden spikes were seen
  always @(negedge clk) if (rst_n && hs_valid) begin
    hid_seen[hs_unit]++;
    m_hidden++;
    for (int j = 0; j < NC; j++) begin
      automatic int s = ou[j] + wt[hs_unit][j];
      if (s > 127) begin s = 127; mech_sat++; end
      if (s < -128) begin s = -128; mech_sat++; end
      if (mode && s >= int'(thr)) begin s -= int'(thr); oc[j]++; m_outspk++; end
      ou[j] = s;
    end
  end

  task automatic run_sample(int smp);
    int bin, last_bin, n_ev, cyc;
    int ev_bin [$], ev_c [$], ev_t [$];
    exp1.delete(); exp2.delete();
    for (int x = 0; x < NU; x++) begin fired[x] = 1'b0; hid_model[x] = 0; hid_seen[x] = 0; end
    for (int j = 0; j < NC; j++) begin ou[j] = 0; oc[j] = 0; end
    m_sched = 0; m_wrap = 0; m_m1 = 0; m_m2 = 0; m_refr = 0; m_words = 0; m_drop = 0;
    m_hidden = 0; m_outspk = 0;
    mode = smp[0];
    refr_en = (smp % 4 == 1) || (smp % 4 == 2);
    // event list: channel c fires in bin b with probability P_FIRE percent; a
    // few bins are skipped entirely and a few addresses lie outside the channels
    bin = 0;
    for (int b = 0; b < NBINS; b++) begin
      automatic int off = 0;
      if ($urandom_range(0, 15) == 0) continue;
      for (int c = 0; c < NIN; c++) if ($urandom_range(0, 999) < P_FIRE) begin
        ev_bin.push_back(b); ev_c.push_back(c);
        ev_t.push_back(b * BL + off);
        if (off < BL - 1 && $urandom_range(0, 3) == 0) off++;
        if ($urandom_range(0, 200) == 0) begin
          ev_bin.push_back(b); ev_c.push_back(NIN + $urandom_range(0, 100)); ev_t.push_back(b * BL + off);
        end
      end
    end
    n_ev = ev_c.size();
    @(negedge clk) sample_start = 1'b1;
    @(negedge clk) sample_start = 1'b0;
    last_bin = 0;
    for (int e = 0; e < n_ev; e++) begin
      if (ev_bin[e] > last_bin + 1) mech_multitick++;
      last_bin = ev_bin[e];
      if (ev_c[e] >= NIN) m_drop++;
      else model_event(ev_bin[e], ev_c[e]);
      forever begin
        @(negedge clk);
        ev_valid = 1'b1; ev_ts = 32'(ev_t[e]); ev_addr = 16'(ev_c[e]); ev_last = (e == n_ev - 1);
        #1;
        if (ev_ready) begin @(posedge clk); break; end
      end
    end
    @(negedge clk) ev_valid = 1'b0; ev_last = 1'b0;
    cyc = 0;
    while (!decision_valid && cyc < 100000) begin @(negedge clk); cyc++; end
    m_ticks = last_bin;
    // hidden layer
    for (int x = 0; x < NU; x++) begin
      checks++;
      if (hid_seen[x] != hid_model[x]) begin
        failures++; $display("FAIL: sample %0d unit %0d fired %0d times, expected %0d", smp, x, hid_seen[x], hid_model[x]);
      end
    end
    // statistics against the model
    checks += 10;
    if (stats.ticks != 32'(m_ticks)) begin failures++; $display("FAIL: ticks %0d expected %0d", stats.ticks, m_ticks); end
    if (int'(stats.wraps) != m_ticks / D) begin failures++; $display("FAIL: wraps %0d expected %0d", stats.wraps, m_ticks / D); end
    if (stats.sched != 32'(m_sched)) begin failures++; $display("FAIL: sched %0d expected %0d", stats.sched, m_sched); end
    if (stats.wrap_sched != 32'(m_wrap)) begin failures++; $display("FAIL: wrap_sched %0d expected %0d", stats.wrap_sched, m_wrap); end
    if (stats.match1 != 32'(m_m1)) begin failures++; $display("FAIL: match1 %0d expected %0d", stats.match1, m_m1); end
    if (stats.match2 != 32'(m_m2)) begin failures++; $display("FAIL: match2 %0d expected %0d", stats.match2, m_m2); end
    if (stats.refr != 32'(m_refr)) begin failures++; $display("FAIL: refr %0d expected %0d", stats.refr, m_refr); end
    if (stats.cr_words != 32'(m_words)) begin failures++; $display("FAIL: words %0d expected %0d", stats.cr_words, m_words); end
    if (int'(stats.dropped) != m_drop) begin failures++; $display("FAIL: dropped %0d expected %0d", stats.dropped, m_drop); end
    if (stats.hidden != 32'(m_hidden) || stats.out_spikes != 32'(m_outspk)) begin
      failures++; $display("FAIL: hidden %0d/%0d out spikes %0d/%0d", stats.hidden, m_hidden, stats.out_spikes, m_outspk);
    end
    // output layer and decision
    begin
      automatic int bi = 0;
      for (int j = 1; j < NC; j++) if (mode ? (oc[j] > oc[bi]) : (ou[j] > ou[bi])) bi = j;
      checks++;
      if (!decision_valid || int'(decision) != bi) begin
        failures++; $display("FAIL: sample %0d decision %0d expected %0d", smp, decision, bi);
      end
      for (int j = 0; j < NC; j++) begin
        checks += 2;
        if (int'(u[j]) != ou[j]) begin failures++; $display("FAIL: u[%0d]=%0d expected %0d", j, u[j], ou[j]); end
        if (int'(cnt[j]) != oc[j]) begin failures++; $display("FAIL: cnt[%0d]=%0d expected %0d", j, cnt[j], oc[j]); end
      end
    end
    checks++;
    @(negedge clk);
    if (busy) begin failures++; $display("FAIL: busy after the decision"); end
    if (mode) mech_mode1++; else mech_mode0++;
    mech_refr += int'(stats.refr);
    mech_wraps += int'(stats.wraps);
    mech_clr += int'(stats.clr_cycles);
    mech_wrap_sched += int'(stats.wrap_sched);
    mech_stall += int'(stats.lane_stalls);
    mech_conf += int'(stats.merge_conflicts);
    mech_drop += int'(stats.dropped);
    mech_m1 += int'(stats.match1);
    mech_m2 += int'(stats.match2);
    mech_outspk += int'(stats.out_spikes);
    $display("sample %0d: %0d events, %0d bins, %0d detections, %0d hidden spikes, decision %0d (mode %0d, refractory %0d)",
             smp, n_ev, m_ticks + 1, m_m2, m_hidden, decision, mode, refr_en);
  endtask

  task automatic mech(string name, int n);
    checks++;
    $display("mechanism %-28s %0d", name, n);
    if (n == 0 && MECH_REQUIRED) begin failures++; $display("FAIL: mechanism %s never happened", name); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    build_network();
    for (int smp = 0; smp < N_SAMPLES; smp++) run_sample(smp);
    mech("wheel tick", int'(stats.ticks));
    mech("several ticks for one event", mech_multitick);
    mech("wheel wrap", mech_wraps);
    mech("plane-clear sweep cycles", mech_clr);
    mech("schedule into next generation", mech_wrap_sched);
    if (NSP == 3) mech("spine-1 match", mech_m1);
    mech("final-spine match (detection)", mech_m2);
    mech("refractory suppression", mech_refr);
    mech("router lane stall", mech_stall);
    mech("merge conflict", mech_conf);
    mech("dropped address", mech_drop);
    mech("channel without targets", mech_empty_chan);
    mech("output spike", mech_outspk);
    mech("output saturation", mech_sat);
    mech("potential-mode decision", mech_mode0);
    mech("spike-count-mode decision", mech_mode1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
