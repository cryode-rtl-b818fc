// lfsr96 -- 96-bit linear feedback shift register, 32 fresh random bits per clock.
//
// The random trigger needs a uniformly distributed 32-bit number every clock. A 96-bit
// Fibonacci LFSR (a 96-bit register is what the design calls for) is stepped 32 times per
// clock in combinational logic; after those steps its low 32 bits are all new, and they are
// the output. Each step shifts the register left by one and enters at bit 0 the XOR of
// bits 95, 93, 48 and 46 (taps 96, 94, 49, 47 in the usual 1-based notation, a
// maximal-length set, period 2^96 - 1). The tap set, the 32-steps-per-clock unrolling and
// the reset seed are this implementation's choices.
//
// Interface: clk, rst_n (synchronous, loads SEED), ce (advance), rnd (registered, changes
// one clock after each ce).
module lfsr96 #(
  parameter logic [95:0] SEED = 96'h5DEECE66D_123456789ABCDEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ce,
  output logic [31:0] rnd
);

  logic [95:0] state_q, state_d;

  always_comb begin
    state_d = state_q;
    for (int s = 0; s < 32; s++) begin
      state_d = {state_d[94:0], state_d[95] ^ state_d[93] ^ state_d[48] ^ state_d[46]};
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)  state_q <= (SEED == '0) ? 96'd1 : SEED;
    else if (ce) state_q <= state_d;
  end

  assign rnd = state_q[31:0];

  // An LFSR must never reach the all-zero lock-up state.
  a_nonzero: assert property (@(posedge clk) disable iff (!rst_n) state_q != '0);

endmodule
