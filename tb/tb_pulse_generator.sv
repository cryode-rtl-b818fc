// tb_pulse_generator -- runs pulse_generator next to a cycle-level reference model of the
// two-state playback algorithm with its own real-valued pulse table (tolerance 2 LSB for
// the integer table build). Covers: one LUT sample per clock (pulse lasts N+1 clocks),
// three clocks per sample (3N-1 clocks), a trigger before 80 % of tau1 (ignored), one
// after it (restart), amplitude 0.5 and saturation, and enable low freezing the machine.
//
// The playback algorithm and the 80 % restart rule follow the design description; the
// pulse constants, the amplitude format and the index counting up are this design's own.
module tb_pulse_generator;
  localparam int N = 4096, TAU0 = 4, TAU1 = 800, TAUR = 1;
  localparam int RETRIG_N = 640;

  logic clk = 0, rst_n = 0, ce = 1, enable = 1, trigger = 0;
  logic [31:0] t_clk = 2000, t_step = 2000;
  logic [15:0] amplitude = 16'h8000;
  logic [15:0] pulse;
  logic busy;
  int checks = 0, failures = 0;

  pulse_generator dut (.clk, .rst_n, .ce, .enable, .trigger, .t_clk, .t_step, .amplitude, .pulse, .busy);

  always #1 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
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

  // ---- reference table
  int ref_lut [N];
  function automatic real g(input real t);
    return real'(TAU1) / (TAU1 - TAUR) * ($exp(-t / TAU1) - $exp(-t / TAUR))
         - real'(TAU0) / (TAU0 - TAUR) * ($exp(-t / TAU0) - $exp(-t / TAUR));
  endfunction

  // ---- reference model state
  bit       m_run;
  int       m_n;
  longint   m_tc, m_tn;
  int       m_raw, m_pulse;

  task automatic model_step(input bit trig);
    if (ce && enable) begin
      if (!m_run) begin
        m_raw = 0;
        if (trig) m_run = 1;
      end else if (m_n == N) begin
        m_run = 0; m_raw = 0; m_n = 0; m_tc = 0; m_tn = 0;
      end else if (trig && m_n >= RETRIG_N) begin
        m_raw = ref_lut[0]; m_n = 0; m_tc = 0; m_tn = 0;
      end else begin
        m_tc += t_clk;
        m_raw = ref_lut[m_n];
        if (m_tc > m_tn) begin
          m_tn += t_step;
          m_n++;
        end
      end
    end
  endtask

  // one clock with the given trigger; the scaled output is a register after m_raw
  task automatic cycle(input bit trig);
    int next_pulse;
    longint prod;
    trigger    = trig;
    prod       = longint'(m_raw) * amplitude;
    next_pulse = ce ? ((prod >> 15) > 65535 ? 65535 : int'(prod >> 15)) : m_pulse;
    model_step(trig);
    @(negedge clk);
    m_pulse = next_pulse;
    check(int'(pulse) >= m_pulse - 2 && int'(pulse) <= m_pulse + 2 && busy == m_run,
          $sformatf("pulse %0d expected %0d, busy %0b expected %0b, n=%0d", pulse, m_pulse, busy, m_run, m_n));
  endtask

  // play until idle, return the number of busy clocks
  task automatic play(output int busy_clocks);
    busy_clocks = 0;
    cycle(1'b1);
    while (busy) begin
      cycle(1'b0);
      busy_clocks++;
    end
  endtask

  initial begin
    real peak;
    int  len, hits;
    peak = 0.0;
    for (int k = 0; k < N; k++) if (g(k) > peak) peak = g(k);
    for (int k = 0; k < N; k++) ref_lut[k] = int'(g(k) / peak * 65535.0 + 0.5);
    m_run = 0; m_n = 0; m_tc = 0; m_tn = 0; m_raw = 0; m_pulse = 0;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    repeat (3) cycle(1'b0);

    // 1. one table sample per clock: N+1 busy clocks
    play(len);
    check(len == N + 1, $sformatf("pulse length %0d, expected %0d", len, N + 1));
    repeat (4) cycle(1'b0);

    // 2. Delta t = 3 T_c: 3N-1 busy clocks
    t_step = 6000;
    play(len);
    check(len == 3 * N - 1, $sformatf("pulse length %0d, expected %0d", len, 3 * N - 1));
    t_step = 2000;
    repeat (4) cycle(1'b0);

    // 3. retrigger: early trigger ignored, late trigger restarts
    cycle(1'b1);
    repeat (100) cycle(1'b0);
    cycle(1'b1);                         // n ~ 100 < RETRIG_N: ignored
    repeat (3) cycle(1'b0);
    check(pulse > 40000, $sformatf("early trigger must not restart the pulse, pulse=%0d", pulse));
    repeat (700) cycle(1'b0);
    cycle(1'b1);                         // n ~ 800 >= RETRIG_N: restart
    repeat (3) cycle(1'b0);
    check(pulse < 20000, $sformatf("late trigger must restart the pulse, pulse=%0d", pulse));
    while (busy) cycle(1'b0);

    // 4. amplitude 0.5 and saturation at 2.0
    amplitude = 16'h4000;
    cycle(1'b1);
    repeat (40) cycle(1'b0);
    amplitude = 16'hFFFF;
    repeat (40) cycle(1'b0);
    check(pulse == 16'hFFFF, "amplitude near 2.0 saturates near the peak");
    amplitude = 16'h8000;

    // 5. enable low freezes the machine
    enable = 0;
    cycle(1'b0);
    hits = pulse;
    repeat (50) cycle(1'b0);
    check(pulse == hits && busy, "enable low holds the output");
    enable = 1;
    while (busy) cycle(1'b0);

    // 6. ce low holds everything
    cycle(1'b1);
    repeat (10) cycle(1'b0);
    ce = 0;
    repeat (20) cycle(1'b1);
    ce = 1;
    while (busy) cycle(1'b0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
