// axil_regs -- AXI4-Lite register file holding the run-time settings of one channel.
//
// The settings the design leaves to run time (count rate and enable of the random
// trigger, pulse amplitude and time steps, SQUID-response frequency, amplitude and offset,
// carrier frequency) are 32-bit registers written over AXI4-Lite and presented to the
// datapath as one cfg_t struct. Map (byte addresses, see cryode_pkg):
//   0x00 CTRL        bit0 trigger enable, bit1 pulse-generator enable      reset 0
//   0x04 COUNT_RATE  trigger threshold (trigger when random >= value)      reset 0xFFFFFFFF
//   0x08 PULSE_AMP   [15:0] pulse height, unsigned Q1.15                   reset 0x8000
//   0x0C T_CLK       T_c, time added per clock                             reset 2000
//   0x10 T_STEP      Delta t, time per pulse-table sample                  reset 2000
//   0x14 SQUID_FTW   SQUID-response phase step per sample                  reset 0
//   0x18 SQUID_AMP   [15:0] SQUID-response amplitude, unsigned Q0.16       reset 0
//   0x1C SQUID_OFFSET[15:0] SQUID-response DC level, signed                reset 0
//   0x20 CARRIER_FTW carrier phase step per sample (signed)                reset 0
//   0x24 ID          read-only constant CRYODE_ID
// Unmapped addresses read 0 and ignore writes; every response is OKAY.
// An AXI-Lite control port is what the design describes; the map, reset values and
// handshake details are this implementation's.
//
// Handshake: a write is taken in the cycle in which both AWVALID and WVALID are high and no
// write response is pending (AWREADY = WREADY = that condition); BVALID follows one clock
// later. A read is taken while no read data is pending; RVALID/RDATA follow one clock later.
// WSTRB byte enables are honoured. Both responses hold until accepted.
module axil_regs
  import cryode_pkg::*;
#(
  parameter int unsigned ADDR_W = 6
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] s_axil_awaddr,
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [31:0]       s_axil_wdata,
  input  logic [3:0]        s_axil_wstrb,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  output logic [1:0]        s_axil_bresp,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  input  logic [ADDR_W-1:0] s_axil_araddr,
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  output logic [31:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready,
  output cfg_t              cfg
);

  localparam int unsigned NREGS = 9;  // writable registers 0x00 .. 0x20

  typedef logic [31:0] word_t;
  localparam word_t RESET_VAL [NREGS] = '{
    32'h0000_0000, 32'hFFFF_FFFF, 32'h0000_8000, 32'd2000, 32'd2000,
    32'h0000_0000, 32'h0000_0000, 32'h0000_0000, 32'h0000_0000
  };

  word_t regs [NREGS];

  function automatic logic [3:0] idx_of(input logic [7:0] byte_addr);
    return byte_addr[5:2];
  endfunction
  logic  wr_take, rd_take;

  assign wr_take        = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_awready = wr_take;
  assign s_axil_wready  = wr_take;
  assign rd_take        = s_axil_arvalid && !s_axil_rvalid;
  assign s_axil_arready = !s_axil_rvalid;
  assign s_axil_bresp   = 2'b00;
  assign s_axil_rresp   = 2'b00;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int r = 0; r < NREGS; r++) regs[r] <= RESET_VAL[r];
      s_axil_bvalid <= 1'b0;
    end else begin
      if (wr_take) begin
        int unsigned idx;
        idx = int'(s_axil_awaddr[ADDR_W-1:2]);
        if (idx < NREGS) begin
          for (int b = 0; b < 4; b++) begin
            if (s_axil_wstrb[b]) regs[idx][8*b +: 8] <= s_axil_wdata[8*b +: 8];
          end
        end
        s_axil_bvalid <= 1'b1;
      end else if (s_axil_bready) begin
        s_axil_bvalid <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
    end else if (rd_take) begin
      int unsigned idx;
      idx           = int'(s_axil_araddr[ADDR_W-1:2]);
      s_axil_rvalid <= 1'b1;
      if (idx < NREGS)                          s_axil_rdata <= regs[idx];
      else if ({s_axil_araddr[ADDR_W-1:2], 2'b00} == ADDR_W'(REG_ID)) s_axil_rdata <= CRYODE_ID;
      else                                      s_axil_rdata <= '0;
    end else if (s_axil_rready) begin
      s_axil_rvalid <= 1'b0;
    end
  end

  always_comb begin
    cfg.trig_en      = regs[idx_of(REG_CTRL)][0];
    cfg.pulse_en     = regs[idx_of(REG_CTRL)][1];
    cfg.count_rate   = regs[idx_of(REG_COUNT_RATE)];
    cfg.pulse_amp    = regs[idx_of(REG_PULSE_AMP)][15:0];
    cfg.t_clk        = regs[idx_of(REG_T_CLK)];
    cfg.t_step       = regs[idx_of(REG_T_STEP)];
    cfg.squid_ftw    = regs[idx_of(REG_SQUID_FTW)];
    cfg.squid_amp    = regs[idx_of(REG_SQUID_AMP)][15:0];
    cfg.squid_offset = regs[idx_of(REG_SQUID_OFFSET)][15:0];
    cfg.carrier_ftw  = regs[idx_of(REG_CARRIER_FTW)];
  end

  // AXI rule: a response, once valid, holds until it is accepted.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_axil_bvalid && !s_axil_bready |=> s_axil_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_axil_rvalid && !s_axil_rready |=> s_axil_rvalid && $stable(s_axil_rdata));

endmodule
