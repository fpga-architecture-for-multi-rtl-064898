// pde: Programmable Delay Element -- behavioural model.
//
// The PDE lets a PLB implement circuits with timing assumptions, such as the
// matched delay that bundles the request with the data in a micropipeline.
// The paper gives its role but not its circuit, and a delay line is an analog
// property of the silicon, not synthesizable logic. This model delays every
// change of din by (sel + 1) * UNIT time units (transport delay). The number
// of settings and the step are this design's assumptions.
module pde
  import fpga_pkg::*;
#(
  parameter int unsigned SEL_W = PDE_SEL_W,
  parameter int unsigned UNIT  = PDE_UNIT
)(
  input  logic [SEL_W-1:0] sel,
  input  logic             din,
  output logic             dout
);
  initial dout = 1'b0;
  always @(din) dout <= #((32'(sel) + 1) * UNIT) din;
endmodule
