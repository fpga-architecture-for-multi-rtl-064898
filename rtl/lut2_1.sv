// lut2_1: 2-input, 1-output look-up table.
//
// Placed after the LUT7-3 of each logic element to compute the validity of a
// multi-rail signal (for instance the OR of the two rails of a dual-rail
// bit), as the paper motivates. out = table[{a, b}]. Combinational.
module lut2_1
  import fpga_pkg::*;
(
  input  logic [LUT2_BITS-1:0] table_i,
  input  logic                 a,
  input  logic                 b,
  output logic                 y
);
  always_comb y = table_i[{a, b}];
endmodule
