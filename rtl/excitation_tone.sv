// excitation_tone -- NCO generating the complex carrier tone of one resonator.
//
// Instead of taking the full frequency comb as input, each emulated channel makes the
// carrier tone it would modulate. A phase accumulator advances by SPC*ftw per clock; for
// sample k of a beat the phase acc + k*ftw addresses a sine table for Q (sin) and, a
// quarter period further on, for I (cos). ftw is taken as a signed step, so negative
// baseband frequencies (-fs/2 .. fs/2, fs = SPC * clock) are reached by wrap-around.
// The carrier has full-scale amplitude: only its frequency is a user setting, as in the
// design description; table size and widths are this implementation's choices.
//
// Timing: i_out/q_out are registered table outputs, one ce-clock after the phase that
// selects them; a change of ftw reaches the outputs two ce-clocks later.
module excitation_tone
  import cryode_pkg::sample_t, cryode_pkg::SAMPLE_W;
#(
  parameter int unsigned SPC     = cryode_pkg::SPC,
  parameter int unsigned PHASE_W = cryode_pkg::PHASE_W,
  parameter int unsigned SIN_AW  = 12
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               ce,
  input  logic [PHASE_W-1:0] ftw,
  output sample_t            i_out [SPC],
  output sample_t            q_out [SPC]
);

  localparam logic [SIN_AW-1:0] QUARTER = SIN_AW'(1 << (SIN_AW - 2));

  logic [PHASE_W-1:0] acc_q;
  logic [SIN_AW-1:0]  addr [2*SPC];
  sample_t            data [2*SPC];

  always_ff @(posedge clk) begin
    if (!rst_n)  acc_q <= '0;
    else if (ce) acc_q <= acc_q + PHASE_W'(SPC) * ftw;
  end

  always_comb begin
    for (int k = 0; k < SPC; k++) begin
      logic [PHASE_W-1:0] ph;
      ph              = acc_q + PHASE_W'(k) * ftw;
      addr[2*k]       = ph[PHASE_W-1 -: SIN_AW] + QUARTER;  // cos
      addr[2*k+1]     = ph[PHASE_W-1 -: SIN_AW];            // sin
    end
  end

  sine_rom #(.AW(SIN_AW), .DW(SAMPLE_W), .NPORTS(2*SPC)) u_rom (
    .clk (clk),
    .ce  (ce),
    .addr(addr),
    .data(data)
  );

  always_comb begin
    for (int k = 0; k < SPC; k++) begin
      i_out[k] = data[2*k];
      q_out[k] = data[2*k+1];
    end
  end

endmodule
