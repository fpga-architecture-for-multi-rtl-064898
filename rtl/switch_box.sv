// switch_box: the routing switch of one tile.
//
// A tile drives TRACKS unidirectional tracks toward each of its four
// neighbours (N, E, S, W). Each outgoing track picks, by a configuration
// field, VSS (unused), any track arriving from the four directions, or any
// output of the tile's PLB. Turning, going straight and reversing are all
// allowed. The paper names switch boxes in its routing grid without
// describing them; this fully populated multiplexer switch is this design's
// choice.
// Source index: 0 VSS, 1 + dir*TRACKS + track, then SB_PLB0 + PLB output.
// Combinational. Forwarding across tiles closes structural loops through
// the array; they only become real loops when configured so.
module switch_box
  import fpga_pkg::*;
#(
  parameter int unsigned NTRK  = TRACKS,
  parameter int unsigned NPO   = PLB_OUT,
  parameter int unsigned SEL_W = $clog2(1 + NUM_DIR*NTRK + NPO)
)(
  input  logic [NUM_DIR-1:0][NTRK-1:0][SEL_W-1:0] sel,
  input  logic [NUM_DIR-1:0][NTRK-1:0]            trk_in,
  input  logic [NPO-1:0]                          plb_out,
  output logic [NUM_DIR-1:0][NTRK-1:0]            trk_out
);
  localparam int unsigned NSRC = 1 + NUM_DIR*NTRK + NPO;
  logic [NSRC-1:0] src;
  assign src = {plb_out, trk_in, 1'b0};

  always_comb begin
    for (int unsigned d = 0; d < NUM_DIR; d++)
      for (int unsigned t = 0; t < NTRK; t++)
        trk_out[d][t] = (32'(sel[d][t]) < NSRC) ? src[sel[d][t]] : 1'b0;
  end
endmodule
