// tb_random_trigger -- checks every cycle that the trigger equals
// enable AND (random number >= count_rate), one clock after the number, using a reference
// LFSR; then measures the trigger rate for a threshold with probability 1/64 and checks
// that disabling the trigger or setting the threshold to all ones gives no triggers.
//
// The Bernoulli trial against a threshold, with 0 below it, follows the design
// description; the meaning of the threshold value and the test rate are this design's own.
module tb_random_trigger;
  localparam logic [95:0] SEED = 96'h0123_4567_89AB_CDEF_0F0F_F0F0;

  logic clk = 0, rst_n = 0, ce = 1, enable = 0;
  logic [31:0] count_rate = '1;
  logic trigger;
  int checks = 0, failures = 0;

  random_trigger #(.SEED(SEED)) dut (.clk, .rst_n, .ce, .enable, .count_rate, .trigger);

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

  logic [95:0] model;
  function automatic logic [95:0] step32(input logic [95:0] m);
    for (int s = 0; s < 32; s++) m = {m[94:0], m[95] ^ m[93] ^ m[48] ^ m[46]};
    return m;
  endfunction

  // one clock: apply inputs, predict the trigger from the current random number
  task automatic cycle(input bit en, input logic [31:0] thr, input bit do_ce);
    logic expect_trig;
    bit   prev;
    enable = en; count_rate = thr; ce = do_ce;
    prev   = trigger;
    expect_trig = do_ce ? (en && model[31:0] >= thr) : prev;
    @(negedge clk);
    if (do_ce) model = step32(model);
    check(trigger == expect_trig, $sformatf("trigger %0b expected %0b (rnd %h thr %h)",
                                            trigger, expect_trig, model[31:0], thr));
  endtask

  initial begin
    int hits;
    model = SEED;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    // exact comparison, thresholds around the random numbers
    for (int c = 0; c < 3000; c++) begin
      logic [31:0] thr;
      thr = (c % 3 == 0) ? model[31:0] : $urandom;   // includes the equal case
      cycle($urandom_range(0, 4) != 0, thr, $urandom_range(0, 5) != 0);
    end
    // rate: probability 1/64 per clock
    hits = 0;
    for (int c = 0; c < 64000; c++) begin
      cycle(1'b1, 32'hFC00_0000, 1'b1);
      hits += trigger;
    end
    check(hits > 850 && hits < 1150, $sformatf("rate: %0d triggers in 64000 clocks, expected ~1000", hits));
    // all-ones threshold and disabled trigger
    hits = 0;
    for (int c = 0; c < 2000; c++) begin
      cycle(c < 1000 ? 1'b0 : 1'b1, c < 1000 ? 32'h0 : 32'hFFFF_FFFF, 1'b1);
      hits += trigger;
    end
    check(hits <= 1, $sformatf("no triggers expected, got %0d", hits));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
