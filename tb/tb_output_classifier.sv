// tb_output_classifier -- self-checking test of the whole output layer.
//
// 16 hidden units, 4 classes.  Random int8 weight rows are written through the
// configuration port, then each of 40 samples streams a random train of
// hidden spikes (with gaps), pulses finish and waits for decision_valid.  A
// testbench model keeps the saturating potentials, the threshold-and-subtract
// spikes and the per-class counts; the decision must be the first index of the
// largest count (spike-count mode) or of the largest potential (potential
// mode).  The modes alternate between samples.  The latency from finish to
// decision_valid is checked against the two-stage pipeline (at most 3 cycles).
module tb_output_classifier;
  import dendronn_pkg::*;
  localparam int unsigned NU = 16, NC = 4, ACC_W = 8, CNT_W = 8;
  localparam int unsigned K_W = $clog2(NC);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear = 1'b0, mode = 1'b1, hs_valid = 1'b0, hs_ready, finish = 1'b0, idle;
  logic [ACC_W-1:0] thr = 8'd30;
  logic [U_W-1:0] hs_unit = '0;
  logic decision_valid;
  logic [K_W-1:0] decision;
  logic signed [ACC_W-1:0] u [NC];
  logic [CNT_W-1:0] cnt [NC];
  logic [31:0] n_hidden, n_out_spikes;
  logic cfg_we = 1'b0;
  logic [$clog2(NU)-1:0] cfg_addr = '0;
  logic [NC*W_W-1:0] cfg_wdata = '0;

  output_classifier #(.N_UNITS(NU), .N_CLASSES(NC), .ACC_W(ACC_W), .CNT_W(CNT_W)) dut (
    .clk, .rst_n, .clear, .mode, .thr, .hs_valid, .hs_ready, .hs_unit, .finish, .idle,
    .decision_valid, .decision, .u, .cnt, .n_hidden, .n_out_spikes, .cfg_we, .cfg_addr, .cfg_wdata);

  int wt [NU][NC];
  int mu [NC], mc [NC];
  int n_spk, n_hs;
  int n_mode [2];

  task automatic model_spike(int unit);
    for (int j = 0; j < NC; j++) begin
      automatic int s = mu[j] + wt[unit][j];
      if (s > 127) s = 127;
      if (s < -128) s = -128;
      if (mode && s >= int'(thr)) begin s -= int'(thr); if (mc[j] < 255) mc[j]++; n_spk++; end
      mu[j] = s;
    end
  endtask

  initial begin
    n_mode[0] = 0; n_mode[1] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < NU; r++) begin
      @(negedge clk);
      cfg_we = 1'b1; cfg_addr = 4'(r);
      for (int j = 0; j < NC; j++) begin
        wt[r][j] = $urandom_range(0, 90) - 40;
        cfg_wdata[j*W_W +: W_W] = W_W'(wt[r][j]);
      end
    end
    @(negedge clk) cfg_we = 1'b0;
    for (int smp = 0; smp < 40; smp++) begin
      automatic int lat = 0;
      automatic int bi = 0;
      @(negedge clk);
      mode = smp[0];
      clear = 1'b1;
      @(negedge clk) clear = 1'b0;
      for (int j = 0; j < NC; j++) begin mu[j] = 0; mc[j] = 0; end
      n_spk = 0; n_hs = 0;
      for (int n = 0; n < 30; n++) begin
        hs_valid = ($urandom_range(0, 2) != 0);
        hs_unit = U_W'($urandom_range(0, NU - 1));
        if (hs_valid) begin model_spike(int'(hs_unit)); n_hs++; end
        @(negedge clk);
      end
      hs_valid = 1'b0;
      finish = 1'b1;
      @(negedge clk) finish = 1'b0;
      while (!decision_valid && lat < 10) begin @(negedge clk); lat++; end
      checks++;
      if (lat > 2) begin failures++; $display("FAIL: decision latency %0d", lat); end
      for (int j = 1; j < NC; j++)
        if (mode ? (mc[j] > mc[bi]) : (mu[j] > mu[bi])) bi = j;
      checks++;
      if (!decision_valid || int'(decision) != bi) begin
        failures++; $display("FAIL: sample %0d mode %0d decision %0d expected %0d", smp, mode, decision, bi);
      end
      n_mode[mode]++;
      for (int j = 0; j < NC; j++) begin
        checks += 2;
        if (int'(u[j]) != mu[j]) begin failures++; $display("FAIL: u[%0d]=%0d expected %0d", j, u[j], mu[j]); end
        if (int'(cnt[j]) != mc[j]) begin failures++; $display("FAIL: cnt[%0d]=%0d expected %0d", j, cnt[j], mc[j]); end
      end
      checks += 3;
      if (n_hidden != 32'(n_hs)) failures++;
      if (n_out_spikes != 32'(n_spk)) failures++;
      if (hs_ready !== 1'b1 || !idle) failures++;
    end
    checks++;
    if (n_mode[0] == 0 || n_mode[1] == 0) failures++;
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
