// am_mixer -- amplitude modulation of the complex carrier by the SQUID response.
//
// The emulated channel output is the carrier tone multiplied by the SQUID response: for
// each of the SPC samples per clock, I and Q of the carrier are each multiplied by the
// real envelope (one DSP multiplier each). Both operands are signed Q1.15; the product is
// shifted right by 15 and saturated to 16 bits (only -1 * -1 saturates). The multiply
// follows the design description; the number format and saturation are this
// implementation's choice. Timing: one register, latency one ce-clock.
module am_mixer
  import cryode_pkg::sample_t, cryode_pkg::sat16;
#(
  parameter int unsigned SPC = cryode_pkg::SPC
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    ce,
  input  sample_t car_i [SPC],
  input  sample_t car_q [SPC],
  input  sample_t env   [SPC],
  output sample_t out_i [SPC],
  output sample_t out_q [SPC]
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < SPC; k++) begin
        out_i[k] <= '0;
        out_q[k] <= '0;
      end
    end else if (ce) begin
      for (int k = 0; k < SPC; k++) begin
        logic signed [31:0] pi, pq;
        pi       = car_i[k] * env[k];
        pq       = car_q[k] * env[k];
        out_i[k] <= sat16(48'(pi >>> 15));
        out_q[k] <= sat16(48'(pq >>> 15));
      end
    end
  end

endmodule
