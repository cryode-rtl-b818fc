// tb_am_mixer -- random carrier and envelope samples, including the extremes; checks both
// lanes of I and Q against (carrier*envelope) >> 15 with saturation, one clock later, and
// that ce low holds the outputs.
//
// The multiplication of carrier and SQUID response follows the design description; the
// Q1.15 scaling, the saturation and the test values are this design's own.
module tb_am_mixer;
  import cryode_pkg::sample_t;

  logic clk = 0, rst_n = 0, ce = 1;
  sample_t car_i [2], car_q [2], env [2], out_i [2], out_q [2];
  int checks = 0, failures = 0;

  am_mixer dut (.clk, .rst_n, .ce, .car_i, .car_q, .env, .out_i, .out_q);

  always #1 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
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

  function automatic int mult(input int a, input int b);
    int p;
    p = (a * b) >>> 15;
    return p > 32767 ? 32767 : p;
  endfunction

  initial begin
    int ei [2], eq [2];
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 5000; c++) begin
      for (int k = 0; k < 2; k++) begin
        car_i[k] = (c < 4) ? ((c % 2) ? 16'sh8000 : 16'sh7FFF) : sample_t'($urandom);
        car_q[k] = sample_t'($urandom);
        env[k]   = (c < 4) ? ((c / 2) ? 16'sh8000 : 16'sh7FFF) : sample_t'($urandom);
        ei[k]    = mult(car_i[k], env[k]);
        eq[k]    = mult(car_q[k], env[k]);
      end
      ce = (c % 7 != 3);
      if (!ce) for (int k = 0; k < 2; k++) begin ei[k] = out_i[k]; eq[k] = out_q[k]; end
      @(negedge clk);
      for (int k = 0; k < 2; k++) begin
        check(int'(out_i[k]) == ei[k], $sformatf("I%0d: %0d expected %0d", k, out_i[k], ei[k]));
        check(int'(out_q[k]) == eq[k], $sformatf("Q%0d: %0d expected %0d", k, out_q[k], eq[k]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
