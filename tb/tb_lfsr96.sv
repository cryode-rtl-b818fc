// tb_lfsr96 -- compares lfsr96 against a bit-serial reference LFSR (taps 96, 94, 49, 47,
// 32 single steps per clock), checks that reset loads the seed, that ce low holds the
// output, and that the output bits are balanced over many clocks.
//
// A 96-bit LFSR giving 32 bits per clock follows the design description; the taps,
// the unrolling and the seed are this design's own.
module tb_lfsr96;
  localparam logic [95:0] SEED = 96'hA5A5_1234_5678_9ABC_DEF0_0F1E;

  logic clk = 0, rst_n = 0, ce = 0;
  logic [31:0] rnd;
  int checks = 0, failures = 0;

  lfsr96 #(.SEED(SEED)) dut (.clk, .rst_n, .ce, .rnd);

  always #1 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
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

  initial begin
    logic [95:0] model;
    longint ones;
    model = SEED;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    check(rnd == SEED[31:0], "seed after reset");
    ones = 0;
    for (int c = 0; c < 4000; c++) begin
      ce = ($urandom_range(0, 3) != 0);
      @(negedge clk);
      if (ce) begin
        for (int s = 0; s < 32; s++) begin
          logic fb;
          fb    = model[95] ^ model[93] ^ model[48] ^ model[46];
          model = {model[94:0], fb};
        end
      end
      check(rnd == model[31:0], $sformatf("cycle %0d: %h vs %h", c, rnd, model[31:0]));
      ones += $countones(rnd);
    end
    // 4000 words x 32 bits: expect 64000 ones, sigma ~ 253
    check(ones > 62500 && ones < 65500, $sformatf("bit balance %0d", ones));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
