// tb_flux_ramp_demod -- recovers the emulated detector pulse from the channel's output
// stream, as a readout would, and compares it with the pulse that was generated.
//
// One channel runs with a fixed carrier and a SQUID response of 64 samples per period
// (32 clocks), swinging between 8193 and 24575 around an offset of 16384. A burst of
// triggers starts one pulse at amplitude 0x2000, i.e. a peak of a quarter flux quantum.
// The later triggers of the burst fall in the first 80 % of tau1 and are ignored.
// Table step and clock period are equal, so the pulse lasts 4097 clocks.
//
// The testbench then demodulates:
//   1. the magnitude of each complex output sample removes the carrier and leaves the
//      SQUID response;
//   2. for every SQUID period j, the phase of the response's fundamental is
//      atan2(sum m cos theta, sum m sin theta), with theta the nominal SQUID phase
//      2 pi s / 64 of sample s;
//   3. the phase relative to the pulse-free periods, times 65536 / 2 pi, is the recovered
//      detector signal.
// The generated signal of period j is the mean of the monitor output pulse_o over the same
// samples, taken three clocks earlier: two clocks to the SQUID response, one to the output.
//
// RMSE, MAE and R^2 over all periods of the pulse are computed from
//   f(j) = generated value / peak,   data[j] = recovered value / peak
// and must be small (RMSE < 0.01, MAE < 0.005, R^2 > 0.998). Nearly all of that error sits
// in the one period holding the rising edge: there the phase changes within the period, and
// the phase of the fundamental is not the mean phase. This is why the SQUID frequency must
// be far above the detector bandwidth. Every later period must agree within 0.2 % of the
// peak, and so must the pulse-free periods.
// No DAC, noise or frequency demultiplexing is modelled: the test isolates the phase encoding.
//
// The comparison of the recovered with the generated pulse, and RMSE, MAE and R^2 as the
// measures, follow the evaluation of the original. The demodulator, the frequencies and the
// bounds are this testbench's own.
module tb_flux_ramp_demod;
  timeunit 1ns;
  timeprecision 100ps;
  import cryode_pkg::*;

  localparam int SPP      = 64;            // samples per SQUID period
  localparam int CPP      = SPP / 2;       // clocks per SQUID period
  localparam int CLOCKS   = 5200;
  localparam int PERIODS  = CLOCKS / CPP;
  localparam int LAT      = 3;             // pulse_o -> output sample, clocks
  localparam real PI      = 3.14159265358979323846;

  logic        clk = 0, rst_n = 0;
  logic [5:0]  awaddr = '0, araddr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [3:0]  wstrb = 4'hF;
  logic [1:0]  bresp, rresp;
  logic        awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 0;
  logic        arvalid = 0, arready, rvalid, rready = 0;
  logic [63:0] m_axis_tdata;
  logic        m_axis_tvalid, m_axis_tready = 1;
  logic        trigger_o;
  logic [15:0] pulse_o;
  int checks = 0, failures = 0;

  cryode dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .m_axis_tdata, .m_axis_tvalid, .m_axis_tready, .trigger_o, .pulse_o);

  always #5 clk = ~clk;

  initial begin
    repeat (CLOCKS + 2000) @(posedge clk);
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

  task automatic axil_write(input logic [5:0] a, input logic [31:0] d);
    awaddr = a; wdata = d;
    awvalid = 1; wvalid = 1;
    #1;
    while (!(awready && wready)) begin
      @(negedge clk);
      #1;
    end
    @(negedge clk);
    awvalid = 0; wvalid = 0; bready = 1;
    @(negedge clk);
    bready = 0;
  endtask

  // samples: magnitude of output sample s; pulse_o of clock c
  real         mag [CLOCKS * 2];
  logic [15:0] gen [CLOCKS];
  int          clk_idx = -1;

  always @(posedge clk) begin
    if (rst_n && m_axis_tvalid && m_axis_tready && clk_idx < CLOCKS - 1) begin
      int c;
      c = clk_idx + 1;
      clk_idx <= c;
      for (int k = 0; k < 2; k++) begin
        real i_s, q_s;
        i_s = real'($signed(m_axis_tdata[32*k +: 16]));
        q_s = real'($signed(m_axis_tdata[32*k + 16 +: 16]));
        mag[2*c + k] = $sqrt(i_s * i_s + q_s * q_s);
      end
      gen[c] = pulse_o;
    end
  end

  initial begin
    real rec [PERIODS], ref_v [PERIODS];
    real base, peak, se, ae, mean_f, st, rmse, mae, r2, worst_base, worst;
    int  n, n_base, p_first, p_last;

    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    axil_write(REG_PULSE_AMP,    32'h2000);
    axil_write(REG_T_CLK,        32'd2000);
    axil_write(REG_T_STEP,       32'd2000);
    axil_write(REG_SQUID_FTW,    32'h0400_0000);   // 2^32 / 64
    axil_write(REG_SQUID_AMP,    32'h4000);
    axil_write(REG_SQUID_OFFSET, 32'h4000);
    axil_write(REG_CARRIER_FTW,  32'd429_496_730);
    axil_write(REG_COUNT_RATE,   32'd0);            // every clock a trigger
    axil_write(REG_CTRL,         32'd2);            // pulse generator on
    repeat (400) @(negedge clk);
    axil_write(REG_CTRL,         32'd3);            // trigger burst
    axil_write(REG_CTRL,         32'd2);
    wait (clk_idx == CLOCKS - 1);
    @(negedge clk);

    // phase of each SQUID period, relative to the nominal NCO phase
    for (int j = 0; j < PERIODS; j++) begin
      real sc, ss, g;
      sc = 0.0; ss = 0.0; g = 0.0;
      for (int s = j * SPP; s < (j + 1) * SPP; s++) begin
        sc += mag[s] * $cos(2.0 * PI * (s % SPP) / SPP);
        ss += mag[s] * $sin(2.0 * PI * (s % SPP) / SPP);
      end
      rec[j] = $atan2(sc, ss);
      for (int c = j * CPP; c < (j + 1) * CPP; c++) g += (c >= LAT) ? real'(gen[c - LAT]) : 0.0;
      ref_v[j] = g / CPP;
    end

    // baseline from pulse-free periods at the start (skip pipeline fill)
    base = 0.0; n_base = 0;
    for (int j = 2; j < 10; j++) begin
      base += rec[j];
      n_base++;
    end
    base /= n_base;
    for (int j = 0; j < PERIODS; j++) begin
      real d;
      d = rec[j] - base;
      if (d > PI) d -= 2.0 * PI;
      if (d < -PI) d += 2.0 * PI;
      rec[j] = d * 65536.0 / (2.0 * PI);
    end

    peak = 0.0; p_first = -1; p_last = -1;
    for (int j = 0; j < PERIODS; j++) begin
      if (ref_v[j] > peak) peak = ref_v[j];
      if (ref_v[j] > 0.0) begin
        if (p_first < 0) p_first = j;
        p_last = j;
      end
    end
    check(peak > 16000.0 && peak < 16400.0, $sformatf("generated peak %f, expected about 16383", peak));
    check(p_first > 10 && p_last < PERIODS - 2, "whole pulse inside the record");
    check((p_last - p_first + 1) * CPP >= 4097 && (p_last - p_first - 1) * CPP <= 4097,
          $sformatf("pulse spans %0d periods", p_last - p_first + 1));

    worst_base = 0.0;
    for (int j = 2; j < p_first; j++) begin
      real d;
      d = rec[j] < 0.0 ? -rec[j] : rec[j];
      if (d > worst_base) worst_base = d;
    end
    check(worst_base < 0.002 * peak, $sformatf("pulse-free periods recover to %f", worst_base));

    n = 0; se = 0.0; ae = 0.0; mean_f = 0.0;
    for (int j = p_first; j <= p_last; j++) begin
      mean_f += ref_v[j] / peak;
      n++;
    end
    mean_f /= n;
    st = 0.0;
    for (int j = p_first; j <= p_last; j++) begin
      real f, d;
      f   = ref_v[j] / peak;
      d   = f - rec[j] / peak;
      se += d * d;
      ae += d < 0.0 ? -d : d;
      st += (f - mean_f) * (f - mean_f);
    end
    $display("period of the rising edge: generated %f, recovered %f",
             ref_v[p_first] / peak, rec[p_first] / peak);
    worst = 0.0;
    for (int j = p_first + 1; j <= p_last; j++) begin
      real d;
      d = (ref_v[j] - rec[j]) / peak;
      if (d < 0.0) d = -d;
      if (d > worst) worst = d;
    end
    $display("largest error outside the rising edge: %f", worst);
    check(worst < 0.002, "every period after the rising edge recovered within 0.2 %");
    rmse = $sqrt(se / n);
    mae  = ae / n;
    r2   = 1.0 - se / st;
    $display("recovered pulse over %0d SQUID periods: RMSE %f, MAE %f, R^2 %f", n, rmse, mae, r2);
    check(rmse < 0.01, "RMSE of the recovered pulse");
    check(mae < 0.005, "MAE of the recovered pulse");
    check(r2 > 0.998, "R^2 of the recovered pulse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
