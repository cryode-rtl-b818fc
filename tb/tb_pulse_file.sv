// tb_pulse_file -- pulse table loaded from a hex file at build time.
//
// The pulse generator is built with a 256-entry table (LUT_AW = 8) read from
// tb/pulse_file_test.hex instead of the computed MMC pulse. Entry k of that file holds
// ((k * 40503) ^ 0xA5A5) mod 2^16, a pattern with no repeats in which every entry differs
// from its neighbours. The testbench computes the same formula on its own. With
// Delta t = T_c and unit amplitude, one trigger must put the entries on `pulse` in order,
// one per clock, starting three clocks after the trigger, followed by 0 once the table
// ends. A second pulse at amplitude 0.5 must give every entry halved.
//
// Loading the pulse table from a file at build time follows the design description;
// the table contents and its size are this testbench's own.
module tb_pulse_file;
  localparam int AW = 8;
  localparam int N  = 1 << AW;

  logic        clk = 0, rst_n = 0, ce = 1, enable = 1, trigger = 0;
  logic [31:0] t_clk = 32'd1, t_step = 32'd1;
  logic [15:0] amplitude = 16'h8000;
  logic [15:0] pulse;
  logic        busy;
  int checks = 0, failures = 0;

  pulse_generator #(.LUT_AW(AW), .TAU1(100), .LUT_FILE("tb/pulse_file_test.hex")) dut (
    .clk, .rst_n, .ce, .enable, .trigger, .t_clk, .t_step, .amplitude, .pulse, .busy);

  always #1 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] entry(int k);
    return 16'((k * 40503) ^ 32'hA5A5);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // one trigger, then the whole table at the given amplitude (Q1.15)
  task automatic play(input logic [15:0] amp);
    int lat;
    amplitude = amp;
    @(negedge clk);
    trigger = 1;
    @(negedge clk);
    trigger = 0;
    lat = 1;
    while (pulse == 16'd0 && lat < 20) begin
      @(negedge clk);
      lat++;
    end
    check(lat == 3, $sformatf("first sample %0d clocks after the trigger, expected 3", lat));
    for (int k = 0; k < N; k++) begin
      logic [15:0] want;
      want = 16'((32'(entry(k)) * amp) >> 15);
      check(pulse == want, $sformatf("amp %h entry %0d: got %h, expected %h", amp, k, pulse, want));
      @(negedge clk);
    end
    check(pulse == 16'd0, "output returns to 0 after the last entry");
    repeat (3) @(negedge clk);
    check(!busy, "generator idle after the pulse");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    check(pulse == 16'd0 && !busy, "idle after reset");
    play(16'h8000);
    play(16'h4000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
