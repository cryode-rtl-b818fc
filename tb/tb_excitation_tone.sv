// tb_excitation_tone -- compares the complex carrier with a reference NCO using real-valued
// cos/sin (I = cos, Q = sin of acc + k*ftw, acc += 2*ftw per clock, one clock of latency),
// for positive and negative frequencies, within 1 LSB; also checks the magnitude.
//
// A carrier NCO follows the design description; its widths, the quarter-period cos
// read and the tolerance are this design's own.
module tb_excitation_tone;
  import cryode_pkg::sample_t;

  logic clk = 0, rst_n = 0, ce = 1;
  logic [31:0] ftw = 0;
  sample_t i_out [2], q_out [2];
  int checks = 0, failures = 0;

  excitation_tone dut (.clk, .rst_n, .ce, .ftw, .i_out, .q_out);

  always #1 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
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

  function automatic int rnd(input real v);
    return (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
  endfunction

  int ei [2], eq [2];
  logic [31:0] acc;

  initial begin
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    acc = 0;
    for (int c = 0; c < 20000; c++) begin
      int ni [2], nq [2];
      if (c % 5000 == 0) ftw = (c % 10000 == 0) ? $urandom_range(1, 32'h4000_0000) : -$urandom_range(1, 32'h4000_0000);
      ce = (c % 13 != 7);
      for (int k = 0; k < 2; k++) begin
        logic [31:0] ph;
        real a;
        ph    = acc + 32'(k) * ftw;
        a     = 2.0 * 3.14159265358979323846 * ph[31:20] / 4096.0;
        ni[k] = ce ? rnd(32767.0 * $cos(a)) : ei[k];
        nq[k] = ce ? rnd(32767.0 * $sin(a)) : eq[k];
      end
      if (ce) acc = acc + 2 * ftw;
      @(negedge clk);
      ei = ni;
      eq = nq;
      if (c >= 1) begin
        for (int k = 0; k < 2; k++) begin
          real mag;
          check(int'(i_out[k]) - ei[k] <= 1 && ei[k] - int'(i_out[k]) <= 1,
                $sformatf("c=%0d I%0d = %0d expected %0d", c, k, i_out[k], ei[k]));
          check(int'(q_out[k]) - eq[k] <= 1 && eq[k] - int'(q_out[k]) <= 1,
                $sformatf("c=%0d Q%0d = %0d expected %0d", c, k, q_out[k], eq[k]));
          mag = $sqrt(real'(i_out[k]) ** 2 + real'(q_out[k]) ** 2);
          check(mag > 32760.0 && mag < 32775.0, $sformatf("magnitude %f", mag));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
