// interconnect_matrix: the PLB-internal programmable crossbar (IM).
//
// Every sink (the 7 inputs of each LE and the PDE input) is driven by one
// source chosen by a configuration field: VSS, one of the PLB input pins, one
// of the LUT7-3 outputs fed back from either LE, or the PDE output. The paper
// gives the IM's function (mapping PLB inputs, LE inputs and outputs and the
// PDE together) and its VSS source; a one-multiplexer-per-sink crossbar is this
// design's simplest realisation of it.
// Source index: 0 VSS, 1..PLB_IN pins, then 3 feedback signals per LE, then
// the PDE output. Combinational.
module interconnect_matrix
  import fpga_pkg::*;
#(
  parameter int unsigned NSRC  = IM_SRCS,
  parameter int unsigned NSINK = IM_SINKS,
  parameter int unsigned SEL_W = IM_SEL_W
)(
  input  logic [NSINK-1:0][SEL_W-1:0] sel,
  input  logic [NSRC-1:1]             src,   // index 0 is VSS, built in
  output logic [NSINK-1:0]            sink
);
  always_comb begin
    for (int unsigned k = 0; k < NSINK; k++)
      sink[k] = (sel[k] != '0 && 32'(sel[k]) < NSRC) ? src[sel[k]] : 1'b0;
  end
endmodule
