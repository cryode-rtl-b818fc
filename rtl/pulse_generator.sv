// pulse_generator -- LUT-based detector pulse player with clock/sample time alignment.
//
// A trigger starts the playback of a precomputed detector pulse held in a 4096 x 16-bit
// unsigned table (a block RAM with a registered read). The table is sampled with a step
// Delta t (t_step) that need not equal the clock period T_c (t_clk), so two time
// accumulators keep them aligned without interpolation: each clock t_c grows by T_c, the
// current sample LUT[n] is output, and when t_c has passed t_n the index n advances and
// t_n grows by Delta t. When n reaches N the pulse is over: back to IDLE with output,
// index and accumulators at zero. A trigger that arrives while a pulse is playing restarts
// it only once the pulse is past 80 % of its decay constant tau1 (n >= RETRIG_N);
// earlier triggers are dropped. The table value is finally scaled by a Q1.15 amplitude
// (0x8000 = 1.0, saturating at 0xFFFF).
//
// Follows the design description: the two-state algorithm, the accumulator comparison
// (t_c is compared after its increment), the 80 % tau restart rule, the 12-bit address and
// 16-bit unsigned data. Own choices: the end-of-pulse test takes priority over the
// sample step; the index counts up from 0; the restart reloads LUT[0]; the table is
// computed at elaboration from the double-exponential MMC pulse
//   f(t) = tau1/(tau1-taur)*(e^-t/tau1 - e^-t/taur) - tau0/(tau0-taur)*(e^-t/tau0 - e^-t/taur)
// (t, tau0, tau1, taur in LUT samples) normalised to 65535 at its peak. As in the
// original, a measured or precomputed pulse can instead be loaded from a hex file at build
// time: set LUT_FILE to its path (one hex word per entry, $readmemh format). The restart
// point still follows TAU1, so set TAU1 to the file pulse's decay constant.
//
// Interface: enable freezes the whole state machine while low. Timing: after a trigger
// seen in IDLE, LUT[0] appears on `pulse` three clocks later (state change, table read,
// amplitude stage), and each sample is held for about Delta t / T_c clocks.
module pulse_generator #(
  parameter int unsigned LUT_AW = 12,
  parameter int unsigned LUT_DW = 16,
  parameter int unsigned TIME_W = 40,
  parameter int unsigned TAU0   = 4,    // rise constant, LUT samples (must differ from TAUR)
  parameter int unsigned TAU1   = 800,  // decay constant, LUT samples (must differ from TAUR)
  parameter int unsigned TAUR   = 1,    // readout cut-off constant, LUT samples
  parameter string       LUT_FILE = ""  // if set, the table is read from this hex file
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ce,
  input  logic              enable,
  input  logic              trigger,
  input  logic [31:0]       t_clk,
  input  logic [31:0]       t_step,
  input  logic [15:0]       amplitude,
  output logic [LUT_DW-1:0] pulse,
  output logic              busy
);

  localparam int unsigned N        = 1 << LUT_AW;
  localparam int unsigned RETRIG_N = (8 * TAU1 + 5) / 10;  // 80 % of tau1

  // ---------------------------------------------------------------- pulse table
  // Built with integer arithmetic: a^k for a = e^(-1/tau) is iterated in Q0.32, the
  // coefficients tau/(tau - taur) are Q16.16, and the result is normalised to the peak.
  logic [LUT_DW-1:0] lut [N];

  initial begin
    longint unsigned a0, a1, ar, p0, p1, pr;
    longint signed   c0, c1, g, peak;
    if (LUT_FILE != "") begin
      $readmemh(LUT_FILE, lut);
    end else begin
      a0   = cryode_pkg::exp_neg_inv_q32(TAU0);
      a1   = cryode_pkg::exp_neg_inv_q32(TAU1);
      ar   = cryode_pkg::exp_neg_inv_q32(TAUR);
      c0   = (longint'(TAU0) <<< 16) / (longint'(TAU0) - longint'(TAUR));
      c1   = (longint'(TAU1) <<< 16) / (longint'(TAU1) - longint'(TAUR));
      peak = 64'sd1;
      for (int pass = 0; pass < 2; pass++) begin
        p0 = 64'd1 << 32;
        p1 = 64'd1 << 32;
        pr = 64'd1 << 32;
        for (int k = 0; k < N; k++) begin
          g = (c1 * (longint'(p1) - longint'(pr)) - c0 * (longint'(p0) - longint'(pr))) >>> 16;
          if (pass == 0) begin
            if (g > peak) peak = g;
            else if (k > 0) break;  // the pulse is unimodal: past its peak
          end else begin
            lut[k] = (g <= 0) ? '0
                   : LUT_DW'((g * longint'((1 << LUT_DW) - 1) + peak / 2) / peak);
          end
          p0 = (p0 * a0) >> 32;
          p1 = (p1 * a1) >> 32;
          pr = (pr * ar) >> 32;
        end
      end
    end
  end

  // ---------------------------------------------------------------- state machine
  typedef enum logic {IDLE, RUNNING} state_t;

  state_t            state_q, state_d;
  logic [LUT_AW:0]   n_q, n_d;
  logic [TIME_W-1:0] tc_q, tc_d, tn_q, tn_d;
  logic              rd_en;
  logic [LUT_AW-1:0] rd_addr;
  logic              clear_raw;
  logic [LUT_DW-1:0] raw_q;

  always_comb begin
    logic [TIME_W-1:0] tc_inc;
    state_d   = state_q;
    n_d       = n_q;
    tc_d      = tc_q;
    tn_d      = tn_q;
    rd_en     = 1'b0;
    rd_addr   = n_q[LUT_AW-1:0];
    clear_raw = 1'b0;
    tc_inc    = tc_q + TIME_W'(t_clk);
    unique case (state_q)
      IDLE: begin
        clear_raw = 1'b1;
        if (trigger) state_d = RUNNING;
      end
      RUNNING: begin
        if (n_q == (LUT_AW+1)'(N)) begin
          state_d   = IDLE;
          clear_raw = 1'b1;
          n_d       = '0;
          tc_d      = '0;
          tn_d      = '0;
        end else if (trigger && n_q >= (LUT_AW+1)'(RETRIG_N)) begin
          rd_en   = 1'b1;
          rd_addr = '0;
          n_d     = '0;
          tc_d    = '0;
          tn_d    = '0;
        end else begin
          rd_en = 1'b1;
          tc_d  = tc_inc;
          if (tc_inc > tn_q) begin
            tn_d = tn_q + TIME_W'(t_step);
            n_d  = n_q + 1'b1;
          end
        end
      end
      default: state_d = IDLE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= IDLE;
      n_q     <= '0;
      tc_q    <= '0;
      tn_q    <= '0;
      raw_q   <= '0;
    end else if (ce && enable) begin
      state_q <= state_d;
      n_q     <= n_d;
      tc_q    <= tc_d;
      tn_q    <= tn_d;
      if (clear_raw)  raw_q <= '0;
      else if (rd_en) raw_q <= lut[rd_addr];
    end
  end

  // ---------------------------------------------------------------- amplitude scaling
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pulse <= '0;
    end else if (ce) begin
      logic [LUT_DW+15:0] prod;
      logic [LUT_DW:0]    scaled;
      prod   = (LUT_DW+16)'(raw_q) * (LUT_DW+16)'(amplitude);
      scaled = prod[LUT_DW+15:15];  // Q1.15 amplitude: drop 15 fraction bits
      pulse  <= scaled[LUT_DW] ? '1 : scaled[LUT_DW-1:0];
    end
  end

  assign busy = (state_q == RUNNING);

  a_index_range: assert property (@(posedge clk) disable iff (!rst_n) n_q <= (LUT_AW+1)'(N));

endmodule
