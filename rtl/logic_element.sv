// logic_element: one LE of a PLB, a LUT7-3 followed by a LUT2-1.
//
// The LUT2-1 reads the two 6-input halves of the LUT7-3 (hi, lo), so when the
// halves produce the two rails of a dual-rail signal, the LUT2 can give its
// validity. The paper says the LUT2 is "directly plugged to the multi-output
// LUT"; which two of the three LUT7-3 outputs feed it is this design's choice.
// Outputs, in order: o[0]=lo, o[1]=hi, o[2]=lut7, o[3]=lut2. o[2:0] are also
// the feedback signals returned to the PLB's interconnect matrix, which is how
// looped logic such as Muller C-elements and latches is built.
// Combinational.
module logic_element
  import fpga_pkg::*;
(
  input  le_cfg_t              cfg,
  input  logic [LUT_K-1:0]     x,
  output logic [LE_OUTS-1:0]   o
);
  logic lo, hi, l7, l2;

  lut7_3 u_lut7_3 (.table_i(cfg.lut7), .x(x), .lo(lo), .hi(hi), .lut7(l7));
  lut2_1 u_lut2_1 (.table_i(cfg.lut2), .a(hi), .b(lo), .y(l2));

  assign o = {l2, l7, hi, lo};
endmodule
