// tb_cryode -- end-to-end test of one emulator channel. The channel is configured over
// AXI4-Lite while its output is stalled (a stalled output freezes the channel, so settings
// change between two known clock edges); a reference model of the SQUID-response NCO (fed
// with the observed detector signal), the carrier NCO and the mixer, using real-valued
// sine, predicts every output beat within 3 LSB. It also checks the register read-back,
// the trigger-to-pulse latency of three clocks, that a stalled beat holds, and counts
// triggers, pulse ends, phase jumps and stalls, each of which must occur.
//
// The signal chain checked here follows the design description; the stream lane order, the
// back-pressure rule, the tolerances and the stimulus are this design's own.
module tb_cryode;
  timeunit 1ns;
  timeprecision 100ps;
  import cryode_pkg::*;

  localparam int NCH = 1;
  localparam int CYCLES = 16000;

  logic clk = 0, rst_n = 0;
  logic [5:0]  awaddr [NCH], araddr [NCH];
  logic [31:0] wdata [NCH], rdata [NCH];
  logic [3:0]  wstrb [NCH];
  logic [1:0]  bresp [NCH], rresp [NCH];
  logic [NCH-1:0] awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 0;
  logic [NCH-1:0] arvalid = 0, arready, rvalid, rready = 0;
  logic [63:0] m_axis_tdata;
  logic        m_axis_tvalid, m_axis_tready = 0;
  logic [NCH-1:0] trigger_o;
  logic [15:0] pulse_o [NCH];

  logic [15:0] pulse0;
  logic        trig0;
  assign pulse_o[0]   = pulse0;
  assign trigger_o[0] = trig0;

  cryode dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr[0]), .s_axil_awvalid(awvalid[0]), .s_axil_awready(awready[0]),
    .s_axil_wdata(wdata[0]), .s_axil_wstrb(wstrb[0]), .s_axil_wvalid(wvalid[0]), .s_axil_wready(wready[0]),
    .s_axil_bresp(bresp[0]), .s_axil_bvalid(bvalid[0]), .s_axil_bready(bready[0]),
    .s_axil_araddr(araddr[0]), .s_axil_arvalid(arvalid[0]), .s_axil_arready(arready[0]),
    .s_axil_rdata(rdata[0]), .s_axil_rresp(rresp[0]), .s_axil_rvalid(rvalid[0]), .s_axil_rready(rready[0]),
    .m_axis_tdata, .m_axis_tvalid, .m_axis_tready, .trigger_o(trig0), .pulse_o(pulse0));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (CYCLES + 20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // ------------------------------------------------------------ AXI4-Lite write
  task automatic axil_write(input int ch, input logic [7:0] a, input logic [31:0] d);
    awaddr[ch] = a[5:0]; wdata[ch] = d; wstrb[ch] = 4'hF;
    awvalid[ch] = 1; wvalid[ch] = 1;
    #1;
    while (!(awready[ch] && wready[ch])) begin
      @(negedge clk);
      #1;
    end
    @(negedge clk);
    awvalid[ch] = 0; wvalid[ch] = 0; bready[ch] = 1;
    check(bvalid[ch], "write response");
    @(negedge clk);
    bready[ch] = 0;
  endtask

  // ------------------------------------------------------------ shadow of the settings
  cfg_t shadow [NCH];

  task automatic set_reg(input int ch, input logic [7:0] a, input logic [31:0] d);
    axil_write(ch, a, d);
    case (a)
      REG_CTRL:         begin shadow[ch].trig_en = d[0]; shadow[ch].pulse_en = d[1]; end
      REG_COUNT_RATE:   shadow[ch].count_rate = d;
      REG_PULSE_AMP:    shadow[ch].pulse_amp = d[15:0];
      REG_T_CLK:        shadow[ch].t_clk = d;
      REG_T_STEP:       shadow[ch].t_step = d;
      REG_SQUID_FTW:    shadow[ch].squid_ftw = d;
      REG_SQUID_AMP:    shadow[ch].squid_amp = d[15:0];
      REG_SQUID_OFFSET: shadow[ch].squid_offset = d[15:0];
      REG_CARRIER_FTW:  shadow[ch].carrier_ftw = d;
      default: ;
    endcase
  endtask

  // ------------------------------------------------------------ channel reference model
  function automatic int rsin(input logic [11:0] a);
    real v;
    v = 32767.0 * $sin(2.0 * 3.14159265358979323846 * a / 4096.0);
    return (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
  endfunction
  function automatic int sat(input longint v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : int'(v));
  endfunction

  logic [31:0] acc_s [NCH], acc_c [NCH];
  int s1 [NCH][2], env [NCH][2], ci [NCH][2], cq [NCH][2], oi [NCH][2], oq [NCH][2];
  bit known [NCH];  // model registers hold computed values

  // one clock edge of channel ch with the detector signal present before the edge
  task automatic chan_edge(input int ch, input logic [15:0] pulse_before);
    int n_s1 [2], n_env [2], n_ci [2], n_cq [2], n_oi [2], n_oq [2];
    for (int k = 0; k < 2; k++) begin
      logic [31:0] ph;
      ph       = acc_s[ch] + 32'(k) * shadow[ch].squid_ftw + {pulse_before, 16'h0};
      n_s1[k]  = rsin(ph[31:20]);
      n_env[k] = sat(((longint'(s1[ch][k]) * longint'({1'b0, shadow[ch].squid_amp})) >>> 16)
                     + longint'(shadow[ch].squid_offset));
      ph       = acc_c[ch] + 32'(k) * shadow[ch].carrier_ftw;
      n_ci[k]  = rsin(ph[31:20] + 12'd1024);
      n_cq[k]  = rsin(ph[31:20]);
      n_oi[k]  = sat((longint'(ci[ch][k]) * env[ch][k]) >>> 15);
      n_oq[k]  = sat((longint'(cq[ch][k]) * env[ch][k]) >>> 15);
    end
    s1[ch] = n_s1; env[ch] = n_env; ci[ch] = n_ci; cq[ch] = n_cq; oi[ch] = n_oi; oq[ch] = n_oq;
    acc_s[ch] += 2 * shadow[ch].squid_ftw;
    acc_c[ch] += 2 * shadow[ch].carrier_ftw;
  endtask

  function automatic logic [63:0] model_sum();
    logic [63:0] r;
    for (int k = 0; k < 2; k++) begin
      longint si, sq;
      si = 0; sq = 0;
      for (int ch = 0; ch < NCH; ch++) begin si += oi[ch][k]; sq += oq[ch][k]; end
      r[32*k +: 16]      = 16'(sat(si));
      r[32*k + 16 +: 16] = 16'(sat(sq));
    end
    return r;
  endfunction

  // ------------------------------------------------------------ mechanism counters
  int n_trig, n_trig_while_busy, n_restart, n_done, n_jump, n_stall, n_disabled_trig, n_beats;
  int n_amp_switch;
  logic [15:0] pulse_prev [NCH];
  bit trig_enabled_window;

  // ------------------------------------------------------------ clocking of the model
  bit          edge_pending;   // the coming posedge advances the channels
  bit          sum_take;       // the coming posedge loads the summer
  logic [63:0] expect_out;
  bit          expect_valid;
  logic [63:0] held;
  bit          stalled;
  bit          compare_on;

  task automatic step(input bit ready);
    logic [15:0] p_before [NCH];
    bit take, ch_ce;
    m_axis_tready = ready;
    #1;
    take  = m_axis_tvalid && m_axis_tready;
    ch_ce = m_axis_tready || !m_axis_tvalid;
    for (int ch = 0; ch < NCH; ch++) p_before[ch] = pulse_o[ch];
    stalled = m_axis_tvalid && !m_axis_tready;
    held    = m_axis_tdata;
    if (stalled) n_stall++;
    @(negedge clk);
    if (ch_ce) begin
      for (int ch = 0; ch < NCH; ch++) begin
        chan_edge(ch, p_before[ch]);
        // mechanisms seen on the detector signal of this channel
        if (trigger_o[ch]) begin
          n_trig++;
          if (!trig_enabled_window) n_disabled_trig++;
        end
        if (pulse_o[ch] != p_before[ch]) n_jump++;
        if (p_before[ch] > 16'd20000 && pulse_o[ch] < p_before[ch] - 16'd5000) n_restart++;
        if (p_before[ch] != 0 && pulse_o[ch] == 0) n_done++;
      end
    end
    if (ch_ce) begin
      expect_out = model_sum();
      if (lat > 0) begin
        lat++;
        if (lat <= 4) check(pulse_o[0] == 0, $sformatf("pulse before latency, edge %0d", lat - 1));
        else begin
          check(pulse_o[0] != 0, "first non-zero pulse sample four clocks after the trigger");
          n_lat++;
          lat = 0;
        end
      end
      if (trigger_o[0] && !dut.busy && shadow[0].pulse_en && lat == 0) lat = 1;
    end
    if (dut.trigger && dut.busy && ch_ce) n_trig_while_busy++;
    if (stalled) check(m_axis_tvalid && m_axis_tdata == held, "stalled beat holds");
    if (ch_ce && m_axis_tvalid && compare_on) begin
      n_beats++;
      for (int l = 0; l < 4; l++) begin
        int got, exp_v;
        got   = int'(signed'(m_axis_tdata[16*l +: 16]));
        exp_v = int'(signed'(expect_out[16*l +: 16]));
        check(got - exp_v <= 3 && exp_v - got <= 3,
              $sformatf("beat %0d lane %0d: %0d expected %0d", n_beats, l, got, exp_v));
      end
    end
  endtask

  // configure all channels while the output is stalled
  task automatic configure(input int phase);
    m_axis_tready = 0;
    // let the pipeline stop: one beat sits in the summer
    repeat (6) step(1'b0);
    for (int ch = 0; ch < NCH; ch++) begin
      if (phase == 0) begin
        set_reg(ch, REG_COUNT_RATE, 32'hFFFF_FFFF - 32'd2_800_000);   // ~1/1500 per clock
        set_reg(ch, REG_PULSE_AMP, 32'h0000_8000);
        set_reg(ch, REG_SQUID_FTW, 32'h0100_0000 + 32'(ch) * 32'h0010_0000);
        set_reg(ch, REG_SQUID_AMP, 32'h0000_C000);
        set_reg(ch, REG_SQUID_OFFSET, 32'h0000_3000);
        set_reg(ch, REG_CARRIER_FTW, 32'h1000_0000 * 32'(ch + 1) + 32'h0123_4567);
        set_reg(ch, REG_CTRL, 32'h3);
      end else if (phase == 1) begin
        set_reg(ch, REG_PULSE_AMP, 32'h0000_4000);                  // amplitude switch
        n_amp_switch++;
      end else begin
        set_reg(ch, REG_CTRL, 32'h2);                               // trigger disabled
      end
    end
  endtask

  // trigger -> pulse: LUT[0] (= 0) reaches pulse_o three ce-clocks after the trigger is
  // seen, LUT[1] (non-zero) four; counted in ce-clocks, the channel's own time base.
  int n_lat, lat;

  task automatic readback(input logic [7:0] a, input logic [31:0] d);
    araddr[0] = a[5:0]; arvalid[0] = 1;
    #1;
    while (!arready[0]) begin
      @(negedge clk);
      #1;
    end
    @(negedge clk);
    arvalid[0] = 0;
    check(rvalid[0] && rdata[0] == d, $sformatf("read-back %h: %h expected %h", a, rdata[0], d));
    rready[0] = 1;
    @(negedge clk);
    rready[0] = 0;
  endtask

  initial begin
    for (int ch = 0; ch < NCH; ch++) begin
      awaddr[ch] = 0; araddr[ch] = 0; wdata[ch] = 0; wstrb[ch] = 0;
      shadow[ch] = '{trig_en: 1'b0, pulse_en: 1'b0, count_rate: 32'hFFFF_FFFF, pulse_amp: 16'h8000,
                     t_clk: 32'd2000, t_step: 32'd2000, squid_ftw: '0, squid_amp: '0,
                     squid_offset: '0, carrier_ftw: '0};
      acc_s[ch] = 0; acc_c[ch] = 0;
      for (int k = 0; k < 2; k++) begin
        s1[ch][k] = 0; env[ch][k] = 0; ci[ch][k] = 0; cq[ch][k] = 0; oi[ch][k] = 0; oq[ch][k] = 0;
      end
    end
    compare_on = 0;
    trig_enabled_window = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    configure(0);
    readback(REG_SQUID_FTW, 32'h0100_0000);
    readback(REG_ID, CRYODE_ID);
    compare_on = 1;
    for (int c = 0; c < CYCLES; c++) begin
      if (c == CYCLES / 2) configure(1);
      if (c == 3 * CYCLES / 4) begin
        configure(2);
        repeat (2) step(1'b1);
        trig_enabled_window = 0;
      end
      step((c % 97) < 90);
    end
    $display("latency checks %0d", n_lat);
    $display("beats %0d, triggers %0d (%0d while busy on ch0), restarts %0d, pulses ended %0d,",
             n_beats, n_trig, n_trig_while_busy, n_restart, n_done);
    $display("phase jumps %0d, stalls %0d, amplitude switches %0d, triggers while disabled %0d",
             n_jump, n_stall, n_amp_switch, n_disabled_trig);
    check(n_beats > CYCLES / 2, "output beats compared");
    check(n_lat >= 1, "trigger-to-pulse latency measured");
    check(n_trig >= 4, "random triggers occurred");
    check(n_trig_while_busy >= 1, "trigger during a pulse occurred");
    check(n_restart >= 1, "pulse restart after 80 % tau occurred");
    check(n_done >= 1, "pulse played to its end");
    check(n_jump >= 100, "phase jumps of the SQUID response");
    check(n_stall >= 10, "output back-pressure");
    check(n_amp_switch >= 1, "pulse amplitude switched");
    check(n_disabled_trig == 0, "no trigger while disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
