// channel_summer -- adds the output streams of several emulator channels.
//
// A multiplexer with many resonators is emulated by one emulator channel per resonator
// followed by a module that sums their signals; this is that module. For each of the four
// 16-bit lanes of a beat ({Q1, I1, Q0, I0}) the NCH channel values are added at full
// precision, divided by 2^SHIFT (arithmetic shift; the default log2(NCH) keeps any sum in
// range) and saturated to 16 bits. Only the existence of a summing stage comes from the
// design description; the scaling, saturation and handshake are this implementation's.
//
// Handshake: a beat is taken from all inputs at once when every s_tvalid is high and the
// output register is free or being emptied (s_tready is the same for all inputs). The sum
// appears on m_tdata one clock later and holds until m_tready.
module channel_summer
  import cryode_pkg::*;
#(
  parameter int unsigned NCH   = 4,
  parameter int unsigned SHIFT = $clog2(NCH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [TDATA_W-1:0] s_tdata [NCH],
  input  logic [NCH-1:0]     s_tvalid,
  output logic [NCH-1:0]     s_tready,
  output logic [TDATA_W-1:0] m_tdata,
  output logic               m_tvalid,
  input  logic               m_tready
);

  localparam int unsigned LANES = TDATA_W / SAMPLE_W;

  logic take;

  assign take     = (&s_tvalid) && (!m_tvalid || m_tready);
  assign s_tready = {NCH{take}};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      m_tvalid <= 1'b0;
      m_tdata  <= '0;
    end else if (take) begin
      m_tvalid <= 1'b1;
      for (int l = 0; l < LANES; l++) begin
        logic signed [47:0] acc;
        acc = '0;
        for (int c = 0; c < NCH; c++) begin
          acc = acc + 48'(signed'(s_tdata[c][SAMPLE_W*l +: SAMPLE_W]));
        end
        m_tdata[SAMPLE_W*l +: SAMPLE_W] <= sat16(acc >>> SHIFT);
      end
    end else if (m_tready) begin
      m_tvalid <= 1'b0;
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata));

endmodule
