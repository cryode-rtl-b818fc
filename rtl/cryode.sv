// cryode -- one emulated channel of a microwave SQUID multiplexer (resonator + RF-SQUID
// + detector), producing the digital baseband signal the readout electronics would receive.
//
// Chain: random_trigger fires with a user-set probability per clock (Poisson decays);
// pulse_generator plays a detector pulse from its table on each trigger; that detector
// signal is the phase input of squid_response, the NCO modelling the flux-ramp-modulated
// SQUID; am_mixer multiplies the SQUID response onto the complex carrier from
// excitation_tone. axil_regs holds every run-time setting. This structure is the one the
// design description gives.
//
// Stream: m_axis_tdata = {Q1, I1, Q0, I0}, 16-bit signed each, sample 0 earlier in time:
// two complex samples per clock (1 GS/s complex at 500 MHz). The channel has no stream
// input. Back-pressure stops the whole channel: every stage advances only on
// ce = m_axis_tready || !m_axis_tvalid, so a beat holds until taken (this implementation's
// choice; a DAC sink keeps tready high). m_axis_tvalid rises FILL ce-clocks after reset,
// when every pipeline register holds a computed value.
// Monitors trigger_o and pulse_o show the emulated detector signal before modulation.
//
// Latency, in ce-clocks: random number -> trigger 1; trigger -> first pulse sample 3;
// pulse sample -> its phase jump in the SQUID response 2; SQUID response -> output 1.
module cryode
  import cryode_pkg::*;
#(
  parameter logic [95:0] SEED   = 96'h5DEECE66D_123456789ABCDEF,
  parameter int unsigned ADDR_W = 6,
  parameter string       PULSE_FILE = ""  // optional hex file for the pulse table
) (
  input  logic                clk,
  input  logic                rst_n,
  // AXI4-Lite control
  input  logic [ADDR_W-1:0]   s_axil_awaddr,
  input  logic                s_axil_awvalid,
  output logic                s_axil_awready,
  input  logic [31:0]         s_axil_wdata,
  input  logic [3:0]          s_axil_wstrb,
  input  logic                s_axil_wvalid,
  output logic                s_axil_wready,
  output logic [1:0]          s_axil_bresp,
  output logic                s_axil_bvalid,
  input  logic                s_axil_bready,
  input  logic [ADDR_W-1:0]   s_axil_araddr,
  input  logic                s_axil_arvalid,
  output logic                s_axil_arready,
  output logic [31:0]         s_axil_rdata,
  output logic [1:0]          s_axil_rresp,
  output logic                s_axil_rvalid,
  input  logic                s_axil_rready,
  // AXI4-Stream output
  output logic [TDATA_W-1:0]  m_axis_tdata,
  output logic                m_axis_tvalid,
  input  logic                m_axis_tready,
  // monitors
  output logic                trigger_o,
  output logic [SAMPLE_W-1:0] pulse_o
);

  localparam int unsigned FILL = 3;

  cfg_t    cfg;
  logic    ce;
  logic    trigger;
  logic    busy;
  logic [SAMPLE_W-1:0] pulse;
  sample_t squid [SPC];
  sample_t car_i [SPC];
  sample_t car_q [SPC];
  sample_t out_i [SPC];
  sample_t out_q [SPC];
  logic [$clog2(FILL+1)-1:0] fill_q;

  assign ce = m_axis_tready || !m_axis_tvalid;

  axil_regs #(.ADDR_W(ADDR_W)) u_regs (
    .clk           (clk),
    .rst_n         (rst_n),
    .s_axil_awaddr (s_axil_awaddr),
    .s_axil_awvalid(s_axil_awvalid),
    .s_axil_awready(s_axil_awready),
    .s_axil_wdata  (s_axil_wdata),
    .s_axil_wstrb  (s_axil_wstrb),
    .s_axil_wvalid (s_axil_wvalid),
    .s_axil_wready (s_axil_wready),
    .s_axil_bresp  (s_axil_bresp),
    .s_axil_bvalid (s_axil_bvalid),
    .s_axil_bready (s_axil_bready),
    .s_axil_araddr (s_axil_araddr),
    .s_axil_arvalid(s_axil_arvalid),
    .s_axil_arready(s_axil_arready),
    .s_axil_rdata  (s_axil_rdata),
    .s_axil_rresp  (s_axil_rresp),
    .s_axil_rvalid (s_axil_rvalid),
    .s_axil_rready (s_axil_rready),
    .cfg           (cfg)
  );

  random_trigger #(.SEED(SEED)) u_trigger (
    .clk       (clk),
    .rst_n     (rst_n),
    .ce        (ce),
    .enable    (cfg.trig_en),
    .count_rate(cfg.count_rate),
    .trigger   (trigger)
  );

  pulse_generator #(.LUT_FILE(PULSE_FILE)) u_pulse (
    .clk      (clk),
    .rst_n    (rst_n),
    .ce       (ce),
    .enable   (cfg.pulse_en),
    .trigger  (trigger),
    .t_clk    (cfg.t_clk),
    .t_step   (cfg.t_step),
    .amplitude(cfg.pulse_amp),
    .pulse    (pulse),
    .busy     (busy)
  );

  squid_response u_squid (
    .clk      (clk),
    .rst_n    (rst_n),
    .ce       (ce),
    .ftw      (cfg.squid_ftw),
    .amplitude(cfg.squid_amp),
    .offset   (cfg.squid_offset),
    .phase_in (pulse),
    .sample   (squid)
  );

  excitation_tone u_carrier (
    .clk  (clk),
    .rst_n(rst_n),
    .ce   (ce),
    .ftw  (cfg.carrier_ftw),
    .i_out(car_i),
    .q_out(car_q)
  );

  am_mixer u_mixer (
    .clk  (clk),
    .rst_n(rst_n),
    .ce   (ce),
    .car_i(car_i),
    .car_q(car_q),
    .env  (squid),
    .out_i(out_i),
    .out_q(out_q)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fill_q        <= '0;
      m_axis_tvalid <= 1'b0;
    end else if (ce && !m_axis_tvalid) begin
      fill_q        <= fill_q + 1'b1;
      m_axis_tvalid <= (fill_q == $bits(fill_q)'(FILL - 1));
    end
  end

  always_comb begin
    for (int k = 0; k < SPC; k++) begin
      m_axis_tdata[2*SAMPLE_W*k +: SAMPLE_W]            = out_i[k];
      m_axis_tdata[2*SAMPLE_W*k + SAMPLE_W +: SAMPLE_W] = out_q[k];
    end
  end

  assign trigger_o = trigger;
  assign pulse_o   = pulse;

  // AXI4-Stream rule: a beat offered and not taken stays unchanged.
  a_axis_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable(m_axis_tdata));

endmodule
