// squid_response -- NCO emulating the flux-ramp-modulated RF-SQUID response.
//
// Under flux-ramp modulation the SQUID shifts its resonator periodically, which a fixed
// carrier sees as a periodic change of transmitted amplitude; it is modelled as a sine.
// A phase accumulator advances by SPC*ftw per clock and sample k of a beat uses
// acc + k*ftw, so SPC samples per clock come out at a per-sample step of ftw. The detector
// signal phase_in is added to the read pointer (left-aligned: 2^16 units of phase_in are one
// full period, i.e. one flux quantum), so any change of the detector signal makes the read
// address jump and encodes the pulse in the phase. The table value is scaled by amplitude
// (unsigned Q0.16) and a DC offset is added, both saturated to 16 bits.
//
// Follows the design description: NCO over a sine table, user frequency and amplitude,
// detector signal as read-pointer offset. Own choices: the phase alignment of phase_in,
// the offset input, the widths.
//
// Timing: phase_in and acc form the address combinationally; the table read adds one
// clock and the scaling one more, so a change of phase_in shows on `sample` two ce-clocks
// later and a change of ftw three.
module squid_response
  import cryode_pkg::sample_t, cryode_pkg::sat16, cryode_pkg::SAMPLE_W;
#(
  parameter int unsigned SPC     = cryode_pkg::SPC,
  parameter int unsigned PHASE_W = cryode_pkg::PHASE_W,
  parameter int unsigned SIN_AW  = 12
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               ce,
  input  logic [PHASE_W-1:0] ftw,
  input  logic [15:0]        amplitude,
  input  logic signed [15:0] offset,
  input  logic [15:0]        phase_in,
  output sample_t            sample [SPC]
);

  logic [PHASE_W-1:0] acc_q;
  logic [SIN_AW-1:0]  addr  [SPC];
  sample_t            sin_q [SPC];

  always_ff @(posedge clk) begin
    if (!rst_n)  acc_q <= '0;
    else if (ce) acc_q <= acc_q + PHASE_W'(SPC) * ftw;
  end

  always_comb begin
    for (int k = 0; k < SPC; k++) begin
      logic [PHASE_W-1:0] ph;
      ph      = acc_q + PHASE_W'(k) * ftw + {phase_in, {(PHASE_W-16){1'b0}}};
      addr[k] = ph[PHASE_W-1 -: SIN_AW];
    end
  end

  sine_rom #(.AW(SIN_AW), .DW(SAMPLE_W), .NPORTS(SPC)) u_rom (
    .clk (clk),
    .ce  (ce),
    .addr(addr),
    .data(sin_q)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < SPC; k++) sample[k] <= '0;
    end else if (ce) begin
      for (int k = 0; k < SPC; k++) begin
        logic signed [32:0] prod;
        prod      = sin_q[k] * $signed({1'b0, amplitude});
        sample[k] <= sat16(48'(prod >>> 16) + 48'(offset));
      end
    end
  end

endmodule
