// cryode_array -- emulator for NCH channels of a microwave SQUID multiplexer.
//
// Top level. NCH independent cryode channels (one resonator, one RF-SQUID and its detector
// each) run in lock-step and channel_summer adds their complex baseband streams into the
// one stream that goes towards the DAC of the readout system. NCH defaults to the four
// channels of the reference integration described for the emulator; a full multiplexer
// just sets NCH higher. Each channel keeps its own AXI4-Lite control port (the ports are
// arrays indexed by channel), so any AXI interconnect can sit in front. Channel c gets the
// LFSR seed SEED ^ (c+1)*0x9E3779B97F4A7C15 so that the channels' decays are independent.
// Structure (channels then a summing module) follows the design description; port layout
// and seeds are this implementation's.
//
// Stream: m_axis_tdata = {Q1, I1, Q0, I0} of the sum, two complex samples per clock.
// Latency from the channels' outputs: one clock (summing register). A stalled m_axis_tready
// stops every channel together, as each channel's tready is the summer's common s_tready.
module cryode_array
  import cryode_pkg::*;
#(
  parameter int unsigned NCH    = 4,
  parameter logic [95:0] SEED   = 96'h5DEECE66D_123456789ABCDEF,
  parameter int unsigned ADDR_W = 6,
  parameter string       PULSE_FILE = ""  // optional hex file for every channel's pulse table
) (
  input  logic                clk,
  input  logic                rst_n,
  // per-channel AXI4-Lite control
  input  logic [ADDR_W-1:0]   s_axil_awaddr  [NCH],
  input  logic [NCH-1:0]      s_axil_awvalid,
  output logic [NCH-1:0]      s_axil_awready,
  input  logic [31:0]         s_axil_wdata   [NCH],
  input  logic [3:0]          s_axil_wstrb   [NCH],
  input  logic [NCH-1:0]      s_axil_wvalid,
  output logic [NCH-1:0]      s_axil_wready,
  output logic [1:0]          s_axil_bresp   [NCH],
  output logic [NCH-1:0]      s_axil_bvalid,
  input  logic [NCH-1:0]      s_axil_bready,
  input  logic [ADDR_W-1:0]   s_axil_araddr  [NCH],
  input  logic [NCH-1:0]      s_axil_arvalid,
  output logic [NCH-1:0]      s_axil_arready,
  output logic [31:0]         s_axil_rdata   [NCH],
  output logic [1:0]          s_axil_rresp   [NCH],
  output logic [NCH-1:0]      s_axil_rvalid,
  input  logic [NCH-1:0]      s_axil_rready,
  // summed AXI4-Stream output
  output logic [TDATA_W-1:0]  m_axis_tdata,
  output logic                m_axis_tvalid,
  input  logic                m_axis_tready,
  // per-channel monitors of the emulated detector signal
  output logic [NCH-1:0]      trigger_o,
  output logic [SAMPLE_W-1:0] pulse_o        [NCH]
);

  logic [TDATA_W-1:0] ch_tdata [NCH];
  logic [NCH-1:0]     ch_tvalid;
  logic [NCH-1:0]     ch_tready;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    localparam logic [95:0] CH_SEED = SEED ^ (96'(c + 1) * 96'h9E3779B97F4A7C15);

    cryode #(.SEED(CH_SEED), .ADDR_W(ADDR_W), .PULSE_FILE(PULSE_FILE)) u_cryode (
      .clk           (clk),
      .rst_n         (rst_n),
      .s_axil_awaddr (s_axil_awaddr[c]),
      .s_axil_awvalid(s_axil_awvalid[c]),
      .s_axil_awready(s_axil_awready[c]),
      .s_axil_wdata  (s_axil_wdata[c]),
      .s_axil_wstrb  (s_axil_wstrb[c]),
      .s_axil_wvalid (s_axil_wvalid[c]),
      .s_axil_wready (s_axil_wready[c]),
      .s_axil_bresp  (s_axil_bresp[c]),
      .s_axil_bvalid (s_axil_bvalid[c]),
      .s_axil_bready (s_axil_bready[c]),
      .s_axil_araddr (s_axil_araddr[c]),
      .s_axil_arvalid(s_axil_arvalid[c]),
      .s_axil_arready(s_axil_arready[c]),
      .s_axil_rdata  (s_axil_rdata[c]),
      .s_axil_rresp  (s_axil_rresp[c]),
      .s_axil_rvalid (s_axil_rvalid[c]),
      .s_axil_rready (s_axil_rready[c]),
      .m_axis_tdata  (ch_tdata[c]),
      .m_axis_tvalid (ch_tvalid[c]),
      .m_axis_tready (ch_tready[c]),
      .trigger_o     (trigger_o[c]),
      .pulse_o       (pulse_o[c])
    );
  end

  channel_summer #(.NCH(NCH)) u_sum (
    .clk     (clk),
    .rst_n   (rst_n),
    .s_tdata (ch_tdata),
    .s_tvalid(ch_tvalid),
    .s_tready(ch_tready),
    .m_tdata (m_axis_tdata),
    .m_tvalid(m_axis_tvalid),
    .m_tready(m_axis_tready)
  );

endmodule
