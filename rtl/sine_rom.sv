// sine_rom -- full-period sine table with NPORTS registered read ports.
//
// The NCOs of the emulator read precomputed sine samples instead of computing them.
// Entry k holds round((2^(DW-1)-1) * sin(2*pi*k/2^AW)); the table is filled at elaboration
// by repeated rotation through 2*pi/2^AW in Q2.30 integer arithmetic, so no data file is needed. Each port
// returns the entry for its address one clock after ce (a block-RAM style registered read).
// The design description calls only for "a memory containing precomputed sine-wave
// samples"; depth, width, full-period storage and port count are this implementation's.
module sine_rom #(
  parameter int unsigned AW     = 12,
  parameter int unsigned DW     = 16,
  parameter int unsigned NPORTS = 2
) (
  input  logic                 clk,
  input  logic                 ce,
  input  logic [AW-1:0]        addr [NPORTS],
  output logic signed [DW-1:0] data [NPORTS]
);

  localparam int unsigned DEPTH = 1 << AW;

  logic signed [DW-1:0] rom [DEPTH];

  // (c, s) = (cos, sin) of the table angle in Q2.30, advanced by one rotation per entry.
  initial begin
    longint signed c, s, cs, sn, t, amp;
    cs  = cryode_pkg::rot_step_q30(DEPTH, 1'b0);
    sn  = cryode_pkg::rot_step_q30(DEPTH, 1'b1);
    amp = (64'sd1 <<< (DW - 1)) - 1;
    c   = 64'sd1 <<< 30;
    s   = 64'sd0;
    for (int k = 0; k < DEPTH; k++) begin
      rom[k] = DW'((s * amp + (64'sd1 <<< 29)) >>> 30);
      t      = (c * cs - s * sn) >>> 30;
      s      = (s * cs + c * sn) >>> 30;
      c      = t;
    end
  end

  always_ff @(posedge clk) begin
    if (ce) begin
      for (int p = 0; p < NPORTS; p++) data[p] <= rom[addr[p]];
    end
  end

endmodule
