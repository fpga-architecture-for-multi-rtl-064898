// connection_box: connects the routing channels around a tile to the PLB
// input pins.
//
// Each PLB input pin picks, by a configuration field, VSS or any one of the
// tracks arriving at the tile from the four channel directions. The paper
// names connection boxes as part of the routing grid but does not describe
// them; a full multiplexer per pin is this design's choice.
// Source index: 0 VSS, 1 + dir*TRACKS + track. Combinational.
module connection_box
  import fpga_pkg::*;
#(
  parameter int unsigned NTRK = TRACKS,
  parameter int unsigned NPIN = PLB_IN,
  parameter int unsigned SEL_W = $clog2(1 + NUM_DIR*NTRK)
)(
  input  logic [NPIN-1:0][SEL_W-1:0]        sel,
  input  logic [NUM_DIR-1:0][NTRK-1:0]      trk_in,
  output logic [NPIN-1:0]                   pin
);
  logic [NUM_DIR*NTRK:0] src;
  assign src = {trk_in, 1'b0};

  always_comb begin
    for (int unsigned p = 0; p < NPIN; p++)
      pin[p] = (32'(sel[p]) <= NUM_DIR*NTRK) ? src[sel[p]] : 1'b0;
  end
endmodule
