// fpga_tile: one island of the array -- a PLB with its connection box, its
// switch box and its configuration register.
//
// trk_in[d] are the tracks arriving from direction d, trk_out[d] the tracks
// this tile drives toward direction d. The connection box feeds the PLB pins
// from trk_in; the switch box drives trk_out from trk_in and from the PLB
// outputs. The tile's configuration (tile_cfg_t) sits in a shift-chain
// segment of TILE_CFG_BITS bits; cfg_si/cfg_so chain the tiles.
// Lint reports circular combinational logic through the PLB and switch box:
// it is intended. The fabric holds state in configured feedback loops
// (C-elements, latches), and a switch box may send a track back toward the
// tile it came from; such paths only close when a configuration selects them.
module fpga_tile
  import fpga_pkg::*;
(
  input  logic                          cfg_clk,
  input  logic                          rst_n,
  input  logic                          cfg_shift,
  input  logic                          cfg_update,
  input  logic                          cfg_si,
  output logic                          cfg_so,
  input  logic [NUM_DIR-1:0][TRACKS-1:0] trk_in,
  output logic [NUM_DIR-1:0][TRACKS-1:0] trk_out
);
  tile_cfg_t            cfg;
  logic [PLB_IN-1:0]    pin;
  logic [PLB_OUT-1:0]   pout;

  config_register #(.N(TILE_CFG_BITS)) u_cfg (
    .cfg_clk(cfg_clk), .rst_n(rst_n), .shift_en(cfg_shift), .update(cfg_update),
    .si(cfg_si), .so(cfg_so), .cfg_q(cfg)
  );

  connection_box u_cb  (.sel(cfg.cb_sel), .trk_in(trk_in), .pin(pin));
  plb            u_plb (.cfg(cfg.plb), .pin(pin), .pout(pout));
  switch_box     u_sb  (.sel(cfg.sb_sel), .trk_in(trk_in), .plb_out(pout), .trk_out(trk_out));
endmodule
