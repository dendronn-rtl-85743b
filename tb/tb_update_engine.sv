// tb_update_engine -- self-checking test of one update engine with its USM bank.
//
// The testbench plays the time wheel itself (p, g, wrap clears) with a small
// wheel (D = 16) so that many wraps happen, and compares every target's effect
// with a reference model that needs no wheel at all: it keeps, per unit and
// stage, the set of absolute due times (spine 0 at time t adds t + dt0, spine 1
// at t consumes t and adds t + dt1, spine 2 at t consumes t and fires).  The
// hardware is right when its packed two-generation slots give the same spikes.
// Stimulus mixes planned in-order sequences (exact, early and late follow-up
// spikes) with random noise.  The second half turns the refractory period on.
// Directed checks: the paper's example sequences, operation latencies, spike
// back-pressure and activity counters.
module tb_update_engine;
  import dendronn_pkg::*;

  localparam int unsigned UPB  = 8;
  localparam int unsigned N_UE = 4;
  localparam int unsigned LANE = 1;
  localparam int unsigned D    = 16;
  localparam int unsigned DT_W = 4;
  localparam int unsigned ROWS = 2 * UPB;
  localparam int unsigned RA_W = $clog2(ROWS);
  localparam int unsigned RW   = DT_W + 2 * D;
  localparam int unsigned P_W  = $clog2(D);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic            tgt_valid = 1'b0;
  logic            tgt_ready;
  target_t         tgt;
  logic [P_W-1:0]  p = '0;
  logic            g = 1'b0;
  logic            clr_start = 1'b0, clr_all = 1'b0, clr_plane = 1'b0;
  logic            clearing;
  logic            refr_en = 1'b0;
  logic            cfg_we = 1'b0;
  logic [U_W-1:0]  cfg_unit = '0;
  logic            cfg_stage = 1'b0;
  logic [DT_W-1:0] cfg_dt = '0;
  logic            spk_valid, spk_ready = 1'b1;
  logic [U_W-1:0]  spk_unit;
  logic            idle;
  logic [31:0]     n_sched, n_match1, n_match2, n_wrap_sched, n_refr;
  logic            rd_en, wr_en;
  logic [RA_W-1:0] rd_addr, wr_addr;
  logic [RW-1:0]   rd_data, wr_data, wr_mask;

  update_engine #(.UNITS_PER_BANK(UPB), .N_UE(N_UE), .LANE(LANE), .D(D), .DT_W(DT_W)) dut (
    .clk, .rst_n, .tgt_valid, .tgt_ready, .tgt, .p, .g, .clr_start, .clr_all, .clr_plane,
    .clearing, .refr_en, .cfg_we, .cfg_unit, .cfg_stage, .cfg_dt, .spk_valid, .spk_ready,
    .spk_unit, .idle, .n_sched, .n_match1, .n_match2, .n_wrap_sched, .n_refr,
    .usm_rd_en (rd_en), .usm_rd_addr (rd_addr), .usm_rd_data (rd_data),
    .usm_wr_en (wr_en), .usm_wr_addr (wr_addr), .usm_wr_data (wr_data), .usm_wr_mask (wr_mask)
  );

  usm_bank #(.ROWS(ROWS), .D(D), .DT_W(DT_W)) bank (
    .clk, .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data, .wr_mask
  );

  // ---------------- reference model ----------------
  int  dt0 [UPB], dt1 [UPB];
  bit  due1 [UPB][int];          // absolute due times of stage 1
  bit  due2 [UPB][int];
  bit  fired_ref [UPB];
  int  now = 0;                  // absolute tick
  int  ref_sched = 0, ref_m1 = 0, ref_m2 = 0, ref_refr = 0, ref_wrap = 0;

  function automatic bit ref_event(int lu, int s);
    bit spike = 0;
    case (s)
      0: begin
        due1[lu][now + dt0[lu]] = 1;
        ref_sched++;
        if ((now % D) + dt0[lu] >= D) ref_wrap++;
      end
      1: if (due1[lu].exists(now)) begin
        due1[lu].delete(now);
        due2[lu][now + dt1[lu]] = 1;
        ref_m1++;
        if ((now % D) + dt1[lu] >= D) ref_wrap++;
      end
      2: if (due2[lu].exists(now)) begin
        due2[lu].delete(now);
        ref_m2++;
        if (refr_en && fired_ref[lu]) ref_refr++;
        else begin
          spike = 1;
          fired_ref[lu] = 1;
        end
      end
      default: ;
    endcase
    return spike;
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL t=%0d: %s", now, what);
    end
  endtask

  // ---------------- drivers ----------------
  task automatic do_clear(bit all, bit plane);
    @(negedge clk);
    clr_start = 1'b1; clr_all = all; clr_plane = plane;
    @(negedge clk);
    clr_start = 1'b0;
    while (clearing) @(negedge clk);
  endtask

  task automatic write_dt(int lu, bit stage, int dt);
    @(negedge clk);
    cfg_we = 1'b1; cfg_unit = U_W'(lu * N_UE + LANE); cfg_stage = stage; cfg_dt = DT_W'(dt);
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  // Advance the wheel by one tick, clearing the reused plane on wrap.
  task automatic tick();
    now++;
    p = P_W'(now % D);
    if (p == 0) begin
      g = ~g;
      do_clear(1'b0, ~g);
    end
  endtask

  // Send one target and compare the outcome; returns the cycles until idle.
  task automatic send(int lu, int s, output int cycles);
    bit exp_spike;
    bit got = 0;
    int n = 0;
    exp_spike = ref_event(lu, s);
    @(negedge clk);
    tgt_valid = 1'b1;
    tgt = '{valid: 1'b1, unit: U_W'(lu * N_UE + LANE), spine: S_W'(s)};
    while (!tgt_ready) @(negedge clk);
    @(negedge clk);
    tgt_valid = 1'b0;
    n = 1;
    while (!idle) begin
      if (spk_valid && spk_ready) begin
        got = 1;
        check(spk_unit == U_W'(lu * N_UE + LANE), $sformatf("spike unit %0d, expected %0d", spk_unit, lu * N_UE + LANE));
      end
      @(negedge clk);
      n++;
    end
    cycles = n;
    check(got == exp_spike, $sformatf("unit %0d spine %0d: spike %0b, expected %0b", lu, s, got, exp_spike));
  endtask

  // ---------------- stimulus ----------------
  typedef struct { int lu; int s; } ev_t;
  ev_t plan [int][$];

  initial begin : main
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    do_clear(1'b1, 1'b0);
    check(n_sched == 0 && n_match2 == 0, "counters cleared");

    // intervals: unit 0 gets dt 0 for stage 1, others random, some wrapping
    for (int lu = 0; lu < UPB; lu++) begin
      dt0[lu] = (lu == 0) ? 0 : $urandom_range(1, D - 1);
      dt1[lu] = $urandom_range(1, D - 1);
      write_dt(lu, 1'b0, dt0[lu]);
      write_dt(lu, 1'b1, dt1[lu]);
    end
    // fixed intervals for the directed example on unit 3
    dt0[3] = 3; dt1[3] = 5;
    write_dt(3, 1'b0, 3);
    write_dt(3, 1'b1, 5);

    // Directed: in-order sequence fires (paper Fig. 2a), latencies.
    send(3, 0, cyc);
    check(cyc == 2, $sformatf("spine-0 schedule takes 2 cycles, took %0d", cyc));
    repeat (3) tick();
    send(3, 1, cyc);
    check(cyc == 3, $sformatf("spine-1 match takes 3 cycles, took %0d", cyc));
    repeat (5) tick();
    send(3, 2, cyc);                                   // expects a spike
    check(cyc == 3, $sformatf("spine-2 match with spike takes 3 cycles, took %0d", cyc));
    // Early and late spikes do not fire (paper Fig. 2b).
    send(3, 0, cyc);
    repeat (2) tick();
    send(3, 1, cyc);                                   // early: no match
    check(cyc == 2, "failed due check takes 2 cycles");
    tick();
    send(3, 1, cyc);                                   // exact: match
    repeat (6) tick();
    send(3, 2, cyc);                                   // late: no spike
    // Spike back-pressure: the engine holds the spike.
    send(3, 0, cyc);
    repeat (3) tick();
    send(3, 1, cyc);
    repeat (5) tick();
    spk_ready = 1'b0;
    fork
      begin repeat (6) @(negedge clk); spk_ready = 1'b1; end
      send(3, 2, cyc);
    join
    check(cyc > 4, $sformatf("spike held while not ready (%0d cycles)", cyc));

    // Random phase: planned sequences plus noise, refractory off then on.
    for (int phase = 0; phase < 2; phase++) begin
      refr_en = phase[0];
      if (phase == 1) begin
        do_clear(1'b1, 1'b0);                          // new sample
        foreach (due1[i]) begin due1[i].delete(); due2[i].delete(); fired_ref[i] = 0; end
        ref_sched = 0; ref_m1 = 0; ref_m2 = 0; ref_refr = 0; ref_wrap = 0;
        now = 0; p = '0; g = 1'b0;
        plan.delete();
      end
      for (int t = 0; t < 300; t++) begin
        // start a few sequences
        if ($urandom_range(0, 2) == 0) begin
          automatic int lu = $urandom_range(0, UPB - 1);
          automatic int jit1 = ($urandom_range(0, 4) == 0) ? ($urandom_range(0, 1) ? 1 : -1) : 0;
          automatic int jit2 = ($urandom_range(0, 4) == 0) ? ($urandom_range(0, 1) ? 1 : -1) : 0;
          plan[now].push_back('{lu, 0});
          plan[now + dt0[lu] + jit1].push_back('{lu, 1});
          plan[now + dt0[lu] + jit1 + dt1[lu] + jit2].push_back('{lu, 2});
        end
        if (plan.exists(now)) begin
          plan[now].shuffle();
          foreach (plan[now][k]) send(plan[now][k].lu, plan[now][k].s, cyc);
        end
        // noise
        repeat ($urandom_range(0, 2)) send($urandom_range(0, UPB - 1), $urandom_range(0, 2), cyc);
        tick();
      end
      check(n_sched == ref_sched, $sformatf("n_sched %0d vs %0d", n_sched, ref_sched));
      check(n_match1 == ref_m1, $sformatf("n_match1 %0d vs %0d", n_match1, ref_m1));
      check(n_match2 == ref_m2, $sformatf("n_match2 %0d vs %0d", n_match2, ref_m2));
      check(n_refr == ref_refr, $sformatf("n_refr %0d vs %0d", n_refr, ref_refr));
      check(n_wrap_sched == ref_wrap, $sformatf("n_wrap_sched %0d vs %0d", n_wrap_sched, ref_wrap));
      check(ref_m2 > 10, $sformatf("enough detections in phase %0d (%0d)", phase, ref_m2));
      check(ref_wrap > 10, "enough next-generation schedules");
      if (phase == 1) check(ref_refr > 0, "refractory suppression happened");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
