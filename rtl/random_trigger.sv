// random_trigger -- Bernoulli-trial trigger emulating radioactive decays.
//
// Radioactive decay is a Poisson process; over one clock period it is well approximated by
// a Bernoulli trial. Every clock the 32-bit number from lfsr96 is compared with the
// user threshold count_rate: a number below the threshold gives 0, any other gives 1, and
// the result is ANDed with enable. The trigger probability per clock is therefore
// (2^32 - count_rate) / 2^32, and the mean event rate is that times the clock frequency
// (10 Bq at 500 MHz: count_rate = 2^32 - 86). The compare-and-gate structure follows the
// design description; the raw-threshold meaning of count_rate is this implementation's.
//
// Interface: clk, rst_n, ce, enable, count_rate[31:0]; trigger is registered and is valid
// one clock after the random number it was made from.
module random_trigger #(
  parameter logic [95:0] SEED = 96'h5DEECE66D_123456789ABCDEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ce,
  input  logic        enable,
  input  logic [31:0] count_rate,
  output logic        trigger
);

  logic [31:0] rnd;

  lfsr96 #(.SEED(SEED)) u_lfsr (
    .clk  (clk),
    .rst_n(rst_n),
    .ce   (ce),
    .rnd  (rnd)
  );

  always_ff @(posedge clk) begin
    if (!rst_n)  trigger <= 1'b0;
    else if (ce) trigger <= enable && !(rnd < count_rate);
  end

endmodule
