// tb_cryode_pkg -- checks the arithmetic helpers of cryode_pkg against real-valued math:
// sat16 saturation at both ends, the Q2.30 rotation step cos/sin(2*pi/n) and the Q0.32
// decay factor e^(-1/tau) that the table builders use.
//
// The helpers are this design's own means of building the tables at elaboration;
// the tolerances are this testbench's choice.
module tb_cryode_pkg;
  import cryode_pkg::*;

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    real r, ref_v;
    // saturation
    check(sat16(48'sd40000) == 16'sh7FFF, "sat16 positive overflow");
    check(sat16(-48'sd40000) == 16'sh8000, "sat16 negative overflow");
    check(sat16(48'sd1234) == 16'sd1234, "sat16 in range");
    check(sat16(-48'sd32768) == 16'sh8000, "sat16 lower bound");
    check(sat16(48'sd32767) == 16'sh7FFF, "sat16 upper bound");
    // rotation step
    for (int e = 2; e <= 14; e += 4) begin
      int unsigned n;
      n = 1 << e;
      r     = real'(rot_step_q30(n, 1'b0)) / (2.0 ** 30);
      ref_v = $cos(2.0 * 3.14159265358979 / n);
      check((r - ref_v) < 1e-8 && (ref_v - r) < 1e-8, $sformatf("cos step n=%0d: %f vs %f", n, r, ref_v));
      r     = real'(rot_step_q30(n, 1'b1)) / (2.0 ** 30);
      ref_v = $sin(2.0 * 3.14159265358979 / n);
      check((r - ref_v) < 1e-8 && (ref_v - r) < 1e-8, $sformatf("sin step n=%0d: %f vs %f", n, r, ref_v));
    end
    // decay factor
    for (int t = 1; t <= 4001; t += 500) begin
      r     = real'(exp_neg_inv_q32(t)) / (2.0 ** 32);
      ref_v = $exp(-1.0 / t);
      check((r - ref_v) < 1e-8 && (ref_v - r) < 1e-8, $sformatf("exp(-1/%0d): %f vs %f", t, r, ref_v));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
