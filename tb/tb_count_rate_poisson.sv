// tb_count_rate_poisson -- event statistics of the random trigger, in scaled time.
//
// A real channel at 10 Bq and 500 MHz fires about once per 5e7 clocks, too rarely to
// simulate for many seconds. The trigger is a Bernoulli trial per clock, so the same
// statistics appear at a higher probability over a shorter window: here p = 1/100 per
// clock and windows of 1000 clocks, i.e. a mean of 10 events per window as for 10 Bq
// counted per second. Over 3000 windows the test builds the histogram of events per
// window and compares it with the Poisson PMF lambda^k e^-lambda / k!, checks the mean and
// variance, and checks that the cumulative count tracks the expected line.
// A second run uses the threshold for the highest rate quoted for the emulator, 35184 Bq
// at a 500 MHz clock (count_rate = 2^32 - 302231, p = 7.04e-5), for 2e7 clocks (40 ms):
// it expects 1407 events, within five standard deviations.
//
// The Poisson comparison at a mean of 10 events and the 35184 Bq bound follow the
// evaluation of the original; the time scaling and the tolerances are this testbench's own.
module tb_count_rate_poisson;
  localparam int WINDOWS = 3000;
  localparam int W       = 1000;
  localparam real LAMBDA = 10.0;
  localparam int TOP_CLOCKS = 20_000_000;
  localparam int TOP_DELTA  = 302_231;   // 35184 Bq * 2^32 / 500 MHz

  logic clk = 0, rst_n = 0, ce = 1, enable = 0;
  logic [31:0] count_rate = 32'hFFFF_FFFF;
  logic trigger;
  int checks = 0, failures = 0;

  random_trigger dut (.clk, .rst_n, .ce, .enable, .count_rate, .trigger);

  always #1 clk = ~clk;

  initial begin
    repeat (WINDOWS * W + TOP_CLOCKS + 10000) @(posedge clk);
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

  int hist [40];
  initial begin
    real mean, var_s, pmf, fact, worst;
    longint total;
    int max_dev_cum;
    foreach (hist[k]) hist[k] = 0;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    // p = (2^32 - count_rate) / 2^32 = 1/100
    count_rate = 32'hFFFF_FFFF - 32'd42_949_672;
    enable = 1;
    @(negedge clk);
    total = 0;
    max_dev_cum = 0;
    for (int w = 0; w < WINDOWS; w++) begin
      int n;
      int dev;
      n = 0;
      for (int c = 0; c < W; c++) begin
        @(negedge clk);
        n += trigger;
      end
      hist[n < 39 ? n : 39]++;
      total += n;
      dev = int'(total) - int'(LAMBDA * (w + 1));
      if (dev < 0) dev = -dev;
      if (dev > max_dev_cum) max_dev_cum = dev;
    end
    mean  = real'(total) / WINDOWS;
    var_s = 0.0;
    foreach (hist[k]) var_s += hist[k] * (k - mean) ** 2;
    var_s = var_s / (WINDOWS - 1);
    $display("events per window: mean %f, variance %f (Poisson: %f, %f)", mean, var_s, LAMBDA, LAMBDA);
    $display("  k  measured  Poisson PMF");
    fact  = 1.0;
    worst = 0.0;
    for (int k = 0; k <= 20; k++) begin
      real meas, d;
      if (k > 0) fact = fact * k;
      pmf  = (LAMBDA ** k) * $exp(-LAMBDA) / fact;
      meas = real'(hist[k]) / WINDOWS;
      d    = meas > pmf ? meas - pmf : pmf - meas;
      if (d > worst) worst = d;
      $display(" %2d  %f  %f", k, meas, pmf);
    end
    $display("largest deviation of the cumulative count from 10 per window: %0d events", max_dev_cum);
    check(mean > 9.8 && mean < 10.2, "mean events per window");
    check(var_s > 8.9 && var_s < 11.0, "variance of events per window");
    check(worst < 0.03, $sformatf("histogram within 0.03 of the PMF (worst %f)", worst));
    check(hist[0] < 10, "no excess of empty windows");
    check(max_dev_cum < 600, "cumulative count tracks the expected rate");

    // highest quoted rate, with the register value a user would write
    begin
      int  n_top;
      real expect_top, sigma;
      count_rate = 32'hFFFF_FFFF - 32'(TOP_DELTA) + 32'd1;
      @(negedge clk); @(negedge clk);
      n_top = 0;
      for (int c = 0; c < TOP_CLOCKS; c++) begin
        @(negedge clk);
        n_top += trigger;
      end
      expect_top = real'(TOP_CLOCKS) * TOP_DELTA / 4294967296.0;
      sigma      = $sqrt(expect_top);
      $display("35184 Bq setting: %0d events in %0d clocks (expected %f, rate %f Bq)",
               n_top, TOP_CLOCKS, expect_top, real'(n_top) / (TOP_CLOCKS * 2.0e-9));
      check(real'(n_top) > expect_top - 5.0 * sigma && real'(n_top) < expect_top + 5.0 * sigma,
            "event count at the 35184 Bq setting");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
