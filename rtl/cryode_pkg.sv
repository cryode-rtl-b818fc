// cryode_pkg -- constants and types shared by the detector-emulator channel.
//
// Every stage of the emulator produces two complex samples per clock (SPC = 2), so a
// 500 MHz clock covers a 1 GHz baseband; that number and the 16-bit pulse resolution come
// from the design description. The 16-bit width of the NCO samples, the 32-bit phase
// accumulators and the layout of the run-time configuration (cfg_t) are this
// implementation's own choices. cfg_t is written by axil_regs and read by the datapath.
package cryode_pkg;

  localparam int unsigned SPC      = 2;   // samples per clock
  localparam int unsigned SAMPLE_W = 16;  // width of every sample
  localparam int unsigned PHASE_W  = 32;  // NCO phase-accumulator width
  localparam int unsigned TDATA_W  = 2 * SAMPLE_W * SPC;  // {Q1,I1,Q0,I0}

  typedef logic signed [SAMPLE_W-1:0] sample_t;

  // Run-time parameters of one channel.
  typedef struct packed {
    logic                      trig_en;       // random trigger enable
    logic                      pulse_en;      // pulse generator enable
    logic [31:0]               count_rate;    // Bernoulli threshold: trigger if rnd >= count_rate
    logic [15:0]               pulse_amp;     // pulse height, unsigned Q1.15
    logic [31:0]               t_clk;         // T_c, time per clock
    logic [31:0]               t_step;        // Delta t, time per pulse-LUT sample
    logic [PHASE_W-1:0]        squid_ftw;     // SQUID response phase step per sample
    logic [15:0]               squid_amp;     // SQUID response amplitude, unsigned Q0.16
    logic signed [15:0]        squid_offset;  // SQUID response DC level
    logic [PHASE_W-1:0]        carrier_ftw;   // excitation tone phase step per sample
  } cfg_t;

  // Register byte addresses of axil_regs.
  localparam logic [7:0] REG_CTRL         = 8'h00;
  localparam logic [7:0] REG_COUNT_RATE   = 8'h04;
  localparam logic [7:0] REG_PULSE_AMP    = 8'h08;
  localparam logic [7:0] REG_T_CLK        = 8'h0C;
  localparam logic [7:0] REG_T_STEP       = 8'h10;
  localparam logic [7:0] REG_SQUID_FTW    = 8'h14;
  localparam logic [7:0] REG_SQUID_AMP    = 8'h18;
  localparam logic [7:0] REG_SQUID_OFFSET = 8'h1C;
  localparam logic [7:0] REG_CARRIER_FTW  = 8'h20;
  localparam logic [7:0] REG_ID           = 8'h24;
  localparam logic [31:0] CRYODE_ID       = 32'hC7_0D_E0_01;

  // Saturate a wider signed value to a 16-bit sample.
  function automatic sample_t sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return sample_t'(16'sh7FFF);
    else if (v < -48'sd32768) return sample_t'(16'sh8000);
    else                      return sample_t'(v[15:0]);
  endfunction

  // ------------------------------------------------------------------ table builders
  // Integer-only constant functions that fill the pulse and sine tables at elaboration.

  // e^(-1/tau) as an unsigned Q0.32 number (Taylor series in Q2.30, tau >= 1).
  function automatic longint unsigned exp_neg_inv_q32(input int unsigned tau);
    longint signed x, term, sum;
    x    = (64'sd1 <<< 30) / longint'(tau);
    term = 64'sd1 <<< 30;
    sum  = term;
    for (int i = 1; i <= 24; i++) begin
      term = ((term * x) >>> 30) / longint'(i);
      sum  = (i % 2 == 1) ? sum - term : sum + term;
    end
    return longint'(unsigned'(sum)) << 2;
  endfunction

  // cos(2*pi/n) or sin(2*pi/n) (sel = 1) as signed Q2.30 (Taylor series), the rotation
  // step from which sine_rom builds its table.
  function automatic longint signed rot_step_q30(input int unsigned n, input bit sel);
    localparam longint signed TWO_PI_Q30 = 64'sd6746518852;  // 2*pi * 2^30
    longint signed theta, theta2, term, acc;
    theta  = TWO_PI_Q30 / longint'(n);
    theta2 = (theta * theta) >>> 30;
    term   = sel ? theta : (64'sd1 <<< 30);
    acc    = term;
    for (int i = 1; i <= 8; i++) begin
      term = sel ? -((term * theta2) >>> 30) / longint'((2 * i) * (2 * i + 1))
                 : -((term * theta2) >>> 30) / longint'((2 * i - 1) * (2 * i));
      acc  = acc + term;
    end
    return acc;
  endfunction

endpackage
