// sine_lut: the DDS sine look-up table.
//
// A 2^AW-word ROM holding one period of a sine wave in DW-bit two's
// complement, entry a = round((2^(DW-1)-1) * sin(2*pi*a/2^AW)). The read is
// registered (one clock of latency), as a block RAM would be. At the default
// 16-bit address and 16-bit word the table is 1 Mbit, the memory size quoted
// for the synthesizer; the full-period table (rather than a quarter-wave
// table) is this design's reading of that number. The table is computed when
// the ROM is initialised, so no data file is needed.
module sine_lut #(
  parameter int AW = 16,
  parameter int DW = 16
) (
  input  logic                 clk,
  input  logic [AW-1:0]        addr,
  output logic signed [DW-1:0] data
);

  logic signed [DW-1:0] rom [2**AW];

  initial begin
    for (int a = 0; a < 2**AW; a++) begin
      real v;
      v = (2.0**(DW-1) - 1.0) * $sin(2.0 * 3.14159265358979323846 * real'(a) / (2.0**AW));
      rom[a] = DW'($rtoi(v >= 0.0 ? v + 0.5 : v - 0.5));
    end
  end

  always_ff @(posedge clk) data <= rom[addr];

endmodule
