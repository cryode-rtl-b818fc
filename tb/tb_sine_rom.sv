// tb_sine_rom -- reads every entry of sine_rom through two ports (the second a quarter
// period ahead) and compares with round(32767*sin(2*pi*k/4096)) within 1 LSB; checks the
// one-clock read latency and that ce low holds the outputs.
//
// A precomputed sine memory follows the design description; the table size, the
// rounding and the port count are this design's own.
module tb_sine_rom;
  localparam int AW = 12, DW = 16, DEPTH = 1 << AW;

  logic clk = 0, ce = 1;
  logic [AW-1:0] addr [2];
  logic signed [DW-1:0] data [2];
  int checks = 0, failures = 0;

  sine_rom #(.AW(AW), .DW(DW), .NPORTS(2)) dut (.clk, .ce, .addr, .data);

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

  function automatic int expect_sin(input int k);
    real v;
    v = 32767.0 * $sin(2.0 * 3.14159265358979323846 * k / DEPTH);
    return (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
  endfunction

  initial begin
    int e0, e1;
    for (int k = 0; k < DEPTH; k++) begin
      addr[0] = AW'(k);
      addr[1] = AW'(k + DEPTH / 4);
      @(negedge clk);
      e0 = expect_sin(k);
      e1 = expect_sin((k + DEPTH / 4) % DEPTH);
      check(int'(data[0]) - e0 <= 1 && e0 - int'(data[0]) <= 1, $sformatf("sin[%0d] = %0d, expected %0d", k, data[0], e0));
      check(int'(data[1]) - e1 <= 1 && e1 - int'(data[1]) <= 1, $sformatf("sin[%0d] = %0d, expected %0d", k + DEPTH / 4, data[1], e1));
    end
    // ce low: outputs hold
    ce = 0;
    addr[0] = 0;
    @(negedge clk);
    check(int'(data[0]) == int'(dut.rom[DEPTH - 1]), "ce low holds port 0");
    ce = 1;
    @(negedge clk);
    check(data[0] == 0, "entry 0 after ce");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
