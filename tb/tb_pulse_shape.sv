// tb_pulse_shape -- fidelity of the generated pulse when the table step Delta t is not a
// multiple of the clock period (Delta t = 2.45 T_c). The pulse generator holds each table
// sample instead of interpolating; this test compares every output clock of one pulse with
// the ideal pulse f(t) at that clock's time (t = (m-1) T_c for the m-th running clock) and
// reports the root-mean-squared error, the mean absolute error (both relative to full
// scale) and the coefficient of determination R^2. It checks RMSE < 0.01, MAE < 0.005,
// R^2 > 0.999 and the pulse length, floor((N-1) Delta t / T_c) + 2 clocks.
//
// The metrics follow the evaluation of the original; the ratio 2.45 and the bounds are
// this testbench's own.
module tb_pulse_shape;
  localparam int N = 4096, TAU0 = 4, TAU1 = 800, TAUR = 1;
  localparam int TC = 2000, DT = 4900;

  logic clk = 0, rst_n = 0, ce = 1, enable = 1, trigger = 0;
  logic [31:0] t_clk = TC, t_step = DT;
  logic [15:0] amplitude = 16'h8000;
  logic [15:0] pulse;
  logic busy;
  int checks = 0, failures = 0;

  pulse_generator dut (.clk, .rst_n, .ce, .enable, .trigger, .t_clk, .t_step, .amplitude, .pulse, .busy);

  always #1 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic real g(input real t);
    return real'(TAU1) / (TAU1 - TAUR) * ($exp(-t / TAU1) - $exp(-t / TAUR))
         - real'(TAU0) / (TAU0 - TAUR) * ($exp(-t / TAU0) - $exp(-t / TAUR));
  endfunction

  real samples [$];

  initial begin
    real peak, se, ae, sf, sf2, fmean, ss_tot, rmse, mae, r2;
    int  running, expect_len;
    peak = 0.0;
    for (int k = 0; k < N; k++) if (g(k) > peak) peak = g(k);
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    trigger = 1;
    @(negedge clk);
    trigger = 0;
    // pulse after edge 2+m is the output of running clock m
    @(negedge clk);
    running = 1;
    while (busy) begin
      @(negedge clk);
      samples.push_back(real'(pulse) / 65535.0);
      running++;
    end
    // the last running clock only returns to idle
    expect_len = ((N - 1) * DT) / TC + 2;  // floor((N-1) Delta t / T_c) + 2
    check(running == expect_len, $sformatf("running clocks %0d, expected %0d", running, expect_len));
    se = 0; ae = 0; sf = 0; sf2 = 0;
    for (int m = 1; m < running; m++) begin
      real f, d;
      f   = g(real'(m - 1) * TC / DT) / peak;
      d   = samples[m - 1] - f;
      se += d * d;
      ae += (d < 0) ? -d : d;
      sf += f;
      sf2 += f * f;
    end
    rmse   = $sqrt(se / (running - 1));
    mae    = ae / (running - 1);
    fmean  = sf / (running - 1);
    ss_tot = sf2 - (running - 1) * fmean * fmean;
    r2     = 1.0 - se / ss_tot;
    $display("pulse of %0d clocks: RMSE %f, MAE %f, R^2 %f", running, rmse, mae, r2);
    check(rmse < 0.01, "RMSE below 1 % of full scale");
    check(mae < 0.005, "MAE below 0.5 % of full scale");
    check(r2 > 0.999, "R^2 above 0.999");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
