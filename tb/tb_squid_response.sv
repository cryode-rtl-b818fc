// tb_squid_response -- runs squid_response against a reference NCO using real-valued sine:
// phase = acc + k*ftw + (phase_in << 16), acc += 2*ftw per clock, sample = sat(amp*sin >> 16
// + offset), two clocks after the address. Random phase_in steps check the read-pointer
// jump; amplitude, offset, frequency and ce are varied. Tolerance 1 LSB.
//
// The detector signal as read-pointer offset follows the design description; its left
// alignment, the offset input and the widths are this design's own.
module tb_squid_response;
  import cryode_pkg::sample_t;

  logic clk = 0, rst_n = 0, ce = 1;
  logic [31:0] ftw = 0;
  logic [15:0] amplitude = 0, phase_in = 0;
  logic signed [15:0] offset = 0;
  sample_t sample [2];
  int checks = 0, failures = 0, jumps = 0;

  squid_response dut (.clk, .rst_n, .ce, .ftw, .amplitude, .offset, .phase_in, .sample);

  always #1 clk = ~clk;

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

  function automatic int ref_sin(input logic [11:0] a);
    real v;
    v = 32767.0 * $sin(2.0 * 3.14159265358979323846 * a / 4096.0);
    return (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
  endfunction

  // pipeline of the model: table value after the read register, then scaled sample
  int s1 [2], s2 [2];
  logic [31:0] acc;

  initial begin
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    acc = 0;
    for (int c = 0; c < 20000; c++) begin
      int nxt_s1 [2], nxt_s2 [2];
      // change the settings now and then
      if (c % 2000 == 0) begin
        ftw       = $urandom_range(0, 32'h0800_0000);
        amplitude = 16'($urandom);
        offset    = (c % 4000 == 0) ? 16'sd0 : 16'($urandom_range(0, 16000));
      end
      if (c % 37 == 0) begin
        phase_in = 16'($urandom);
        jumps++;
      end
      ce = (c % 11 != 5);
      for (int k = 0; k < 2; k++) begin
        logic [31:0] ph;
        int v;
        ph         = acc + 32'(k) * ftw + {phase_in, 16'h0};
        nxt_s1[k]  = ce ? ref_sin(ph[31:20]) : s1[k];
        v          = ((s1[k] * int'({1'b0, amplitude})) >>> 16) + int'(offset);
        v          = v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
        nxt_s2[k]  = ce ? v : s2[k];
      end
      if (ce) acc = acc + 2 * ftw;
      @(negedge clk);
      s1 = nxt_s1;
      s2 = nxt_s2;
      if (c >= 3) begin
        for (int k = 0; k < 2; k++) begin
          check(int'(sample[k]) - s2[k] <= 1 && s2[k] - int'(sample[k]) <= 1,
                $sformatf("c=%0d sample%0d = %0d expected %0d", c, k, sample[k], s2[k]));
        end
      end
    end
    check(jumps > 100, "phase jumps exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
