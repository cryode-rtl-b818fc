// tb_axil_regs -- AXI4-Lite master tasks against axil_regs: reset values of every
// register, writes and read-back of each, byte strobes, the read-only ID, unmapped
// addresses, address and data arriving in different cycles, delayed BREADY/RREADY, and
// the mapping of each register onto the cfg struct.
//
// The original specifies only an AXI4-Lite control port; the register map, reset values
// and handshake timing checked here are this design's own.
module tb_axil_regs;
  timeunit 1ns;
  timeprecision 100ps;

  import cryode_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [5:0]  awaddr = 0, araddr = 0;
  logic        awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [31:0] wdata = 0, rdata;
  logic [3:0]  wstrb = 0;
  logic [1:0]  bresp, rresp;
  cfg_t        cfg;
  int checks = 0, failures = 0;

  axil_regs dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .cfg);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
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

  task automatic write(input logic [5:0] a, input logic [31:0] d, input logic [3:0] s = 4'hF,
                       input int data_delay = 0, input int b_delay = 0);
    awaddr = a; awvalid = 1;
    wdata = d; wstrb = s; wvalid = (data_delay == 0);
    repeat (data_delay) @(negedge clk);
    wvalid = 1;
    #1;
    while (!(awready && wready)) begin
      @(negedge clk);
      #1;
    end
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    check(bvalid && bresp == 2'b00, "write response");
    repeat (b_delay) begin
      @(negedge clk);
      check(bvalid, "bvalid holds until bready");
    end
    bready = 1;
    @(negedge clk);
    bready = 0;
  endtask

  task automatic read(input logic [5:0] a, output logic [31:0] d, input int r_delay = 0);
    araddr = a; arvalid = 1;
    #1;
    while (!arready) begin
      @(negedge clk);
      #1;
    end
    @(negedge clk);
    arvalid = 0;
    repeat (r_delay) @(negedge clk);
    check(rvalid && rresp == 2'b00, "read response");
    d = rdata;
    rready = 1;
    @(negedge clk);
    rready = 0;
  endtask

  localparam logic [31:0] RESETS [9] = '{32'h0, 32'hFFFF_FFFF, 32'h8000, 32'd2000, 32'd2000,
                                         32'h0, 32'h0, 32'h0, 32'h0};

  initial begin
    logic [31:0] d;
    logic [31:0] vals [9];
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < 9; r++) begin
      read(6'(4 * r), d, r % 3);
      check(d == RESETS[r], $sformatf("reset value of reg %0d: %h", r, d));
    end
    read(6'h24, d);
    check(d == CRYODE_ID, "ID register");
    read(6'h3C, d);
    check(d == 0, "unmapped read");
    for (int r = 0; r < 9; r++) begin
      vals[r] = $urandom;
      write(6'(4 * r), vals[r], 4'hF, r % 3, (r + 1) % 3);
    end
    write(6'h24, 32'h1234_5678);  // read-only
    write(6'h3C, 32'h1234_5678);  // unmapped
    for (int r = 0; r < 9; r++) begin
      read(6'(4 * r), d);
      check(d == vals[r], $sformatf("reg %0d: %h expected %h", r, d, vals[r]));
    end
    read(6'h24, d);
    check(d == CRYODE_ID, "ID not writable");
    // cfg mapping
    check(cfg.trig_en == vals[0][0] && cfg.pulse_en == vals[0][1], "cfg enables");
    check(cfg.count_rate == vals[1], "cfg count_rate");
    check(cfg.pulse_amp == vals[2][15:0], "cfg pulse_amp");
    check(cfg.t_clk == vals[3] && cfg.t_step == vals[4], "cfg time steps");
    check(cfg.squid_ftw == vals[5] && cfg.squid_amp == vals[6][15:0], "cfg squid ftw/amp");
    check(cfg.squid_offset == vals[7][15:0] && cfg.carrier_ftw == vals[8], "cfg offset/carrier");
    // byte strobes
    write(6'h04, 32'hAABB_CCDD, 4'b0101);
    read(6'h04, d);
    check(d == {vals[1][31:24], 8'hBB, vals[1][15:8], 8'hDD}, $sformatf("strobes: %h", d));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
