// lut7_3: the multi-output look-up table of a logic element.
//
// A 128-bit configuration SRAM is read by two 6-input multiplexers that share
// inputs x[5:0]: one reads the lower 64 bits (output lo), the other the upper
// 64 bits (output hi). A third, 2:1 multiplexer driven by x[6] selects between
// them and gives the 7-input LUT output (lut7 = x[6] ? hi : lo). All three are
// outputs of the block, so an LE can produce two functions of six inputs (two
// rails of a 1-of-N signal) or one function of seven. This follows the
// paper's LUT7-3 (7 inputs, 3 outputs, internal signals made available); the
// split of the table into halves by x[6] is this design's reading of it.
//
// Purely combinational; the table is a configuration input held by the
// tile's configuration register.
module lut7_3
  import fpga_pkg::*;
(
  input  logic [LUT_BITS-1:0] table_i,  // SRAM contents
  input  logic [LUT_K-1:0]    x,        // LUT inputs
  output logic                lo,       // table[x[5:0]]
  output logic                hi,       // table[64 + x[5:0]]
  output logic                lut7      // table[x[6:0]]
);
  localparam int unsigned HALF = LUT_BITS / 2;

  logic [HALF-1:0] tab_lo, tab_hi;
  assign tab_lo = table_i[HALF-1:0];
  assign tab_hi = table_i[LUT_BITS-1:HALF];

  always_comb begin
    lo   = tab_lo[x[LUT_K-2:0]];
    hi   = tab_hi[x[LUT_K-2:0]];
    lut7 = x[LUT_K-1] ? hi : lo;
  end
endmodule
