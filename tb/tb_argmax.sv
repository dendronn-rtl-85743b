// tb_argmax -- self-checking test of the argmax unit.
//
// Two instances, signed and unsigned, get the same random vectors of 7
// 6-bit values, with many ties drawn from a small value set.  Index and
// maximum are compared with a scan in the testbench (first index wins ties).
module tb_argmax;
  localparam int unsigned N = 7, W = 6;
  localparam int unsigned I_W = $clog2(N);
  int checks = 0, failures = 0;

  logic [W-1:0] vals [N];
  logic [I_W-1:0] idx_s, idx_u;
  logic [W-1:0] max_s, max_u;

  argmax #(.N(N), .W(W), .SIGNED(1'b1)) dut_s (.vals, .idx (idx_s), .max_val (max_s));
  argmax #(.N(N), .W(W), .SIGNED(1'b0)) dut_u (.vals, .idx (idx_u), .max_val (max_u));

  initial begin
    for (int n = 0; n < 1000; n++) begin
      int bs, bu;
      for (int i = 0; i < N; i++) vals[i] = (n % 2) ? W'($urandom) : W'($urandom_range(0, 3) * 21);
      #1;
      bs = 0; bu = 0;
      for (int i = 1; i < N; i++) begin
        if ($signed(vals[i]) > $signed(vals[bs])) bs = i;
        if (vals[i] > vals[bu]) bu = i;
      end
      checks += 2;
      if (idx_s != I_W'(bs) || max_s != vals[bs]) begin failures++; $display("FAIL: signed idx %0d expected %0d", idx_s, bs); end
      if (idx_u != I_W'(bu) || max_u != vals[bu]) begin failures++; $display("FAIL: unsigned idx %0d expected %0d", idx_u, bu); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
