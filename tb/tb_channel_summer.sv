// tb_channel_summer -- four random input streams with random valid gaps and a random
// output ready: checks that beats are taken only from all inputs together, that every sum
// lane equals (sum of the four lanes) >>> 2 with saturation, that beats come out in order,
// and that a stalled output holds its data. Also runs an 8-channel instance with SHIFT 0
// to reach saturation.
//
// Summing the channels follows the design description; the all-or-none handshake and
// the divide-by-2^SHIFT scaling checked here are this design's own.
module tb_channel_summer;
  timeunit 1ns;
  timeprecision 100ps;

  localparam int NCH = 4;

  logic clk = 0, rst_n = 0;
  logic [63:0] s_tdata [NCH];
  logic [NCH-1:0] s_tvalid = 0, s_tready;
  logic [63:0] m_tdata;
  logic m_tvalid, m_tready = 0;
  // saturating instance
  logic [63:0] s8_tdata [8];
  logic [7:0]  s8_tvalid = 0, s8_tready;
  logic [63:0] m8_tdata;
  logic m8_tvalid;
  int checks = 0, failures = 0, stalls = 0, sats = 0;

  channel_summer #(.NCH(NCH)) dut (.clk, .rst_n, .s_tdata, .s_tvalid, .s_tready, .m_tdata, .m_tvalid, .m_tready);
  channel_summer #(.NCH(8), .SHIFT(0)) dut8 (.clk, .rst_n, .s_tdata(s8_tdata), .s_tvalid(s8_tvalid),
                                             .s_tready(s8_tready), .m_tdata(m8_tdata), .m_tvalid(m8_tvalid), .m_tready(1'b1));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
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

  function automatic logic [63:0] expect_sum(input logic [63:0] d [], input int shift);
    logic [63:0] r;
    for (int l = 0; l < 4; l++) begin
      int acc;
      acc = 0;
      foreach (d[c]) acc += int'(signed'(d[c][16*l +: 16]));
      acc = acc >>> shift;
      r[16*l +: 16] = acc > 32767 ? 16'h7FFF : (acc < -32768 ? 16'h8000 : 16'(acc));
    end
    return r;
  endfunction

  logic [63:0] queue [$];

  initial begin
    logic [63:0] held;
    logic [63:0] dd [];
    bit was_stalled;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    was_stalled = 0;
    for (int c = 0; c < 5000; c++) begin
      // inputs: keep data stable while valid and not taken
      for (int ch = 0; ch < NCH; ch++) begin
        if (!(s_tvalid[ch] && !s_tready[ch])) begin
          s_tdata[ch]  = {$urandom, $urandom};
          s_tvalid[ch] = ($urandom_range(0, 4) != 0);
        end
      end
      m_tready = ($urandom_range(0, 3) != 0);
      #1;
      if (&s_tvalid && s_tready[0]) begin
        dd = new[NCH];
        foreach (dd[i]) dd[i] = s_tdata[i];
        queue.push_back(expect_sum(dd, 2));
      end
      check((s_tready == '0) || (&s_tvalid), "ready only when all inputs valid");
      if (m_tvalid && m_tready) begin
        check(queue.size() > 0 && m_tdata == queue[0], $sformatf("sum %h expected %h", m_tdata, queue[0]));
        void'(queue.pop_front());
      end
      if (m_tvalid && !m_tready) begin
        stalls++;
        held = m_tdata;
        was_stalled = 1;
      end else was_stalled = 0;
      @(negedge clk);
      if (was_stalled) check(m_tvalid && m_tdata == held, "stalled output holds");
    end
    check(stalls > 100, "output stalls exercised");
    // saturation on the 8-channel instance
    for (int c = 0; c < 200; c++) begin
      logic [63:0] e;
      for (int ch = 0; ch < 8; ch++) s8_tdata[ch] = (c % 2) ? 64'h7000_9000_7000_9000 : {$urandom, $urandom};
      s8_tvalid = '1;
      dd = new[8];
      foreach (dd[i]) dd[i] = s8_tdata[i];
      e = expect_sum(dd, 0);
      @(negedge clk);
      check(m8_tvalid && m8_tdata == e, $sformatf("8-ch sum %h expected %h", m8_tdata, e));
      if (c % 2) begin
        check(m8_tdata == 64'h7FFF_8000_7FFF_8000, "saturation");
        sats++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
