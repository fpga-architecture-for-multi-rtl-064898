// fpga_top: island-style asynchronous-logic FPGA.
//
// ROWS x COLS tiles, each a PLB plunged into the routing grid through its
// connection and switch boxes, as in the paper's island-style top view.
// Neighbouring tiles exchange TRACKS tracks in each direction; at the array
// edge the tracks are brought out as ports: io_*_in feed the tracks arriving
// at edge tiles, io_*_out carry the tracks the edge tiles drive outward
// (io_n_* indexed by column for row 0, io_s_* for row ROWS-1, io_w_* and
// io_e_* by row for column 0 and COLS-1). The fabric has no clock: once
// configured it is a network of LUTs, feedback loops and delays that carries
// self-timed (asynchronous) logic.
//
// Configuration: one shift chain through all tiles, tile r*COLS+c at position
// r*COLS+c from cfg_si. Shift in ROWS*COLS*TILE_CFG_BITS bits, last tile's
// MSB first, with cfg_shift high, then pulse cfg_update for one cfg_clk
// cycle. rst_n clears the active configuration.
// The array is deliberately full of structural combinational loops (track
// forwarding between neighbours in both directions, LE feedback inside every
// PLB); lint reports them as circular logic. They are how this clockless
// fabric carries state, and they only close as the loaded configuration
// selects them. A configuration must be hazard-free, as on silicon.
module fpga_top
  import fpga_pkg::*;
(
  input  logic                                   cfg_clk,
  input  logic                                   rst_n,
  input  logic                                   cfg_shift,
  input  logic                                   cfg_update,
  input  logic                                   cfg_si,
  output logic                                   cfg_so,
  input  logic [COLS-1:0][TRACKS-1:0]            io_n_in,
  output logic [COLS-1:0][TRACKS-1:0]            io_n_out,
  input  logic [COLS-1:0][TRACKS-1:0]            io_s_in,
  output logic [COLS-1:0][TRACKS-1:0]            io_s_out,
  input  logic [ROWS-1:0][TRACKS-1:0]            io_w_in,
  output logic [ROWS-1:0][TRACKS-1:0]            io_w_out,
  input  logic [ROWS-1:0][TRACKS-1:0]            io_e_in,
  output logic [ROWS-1:0][TRACKS-1:0]            io_e_out
);
  localparam int unsigned NT = ROWS*COLS;

  logic [ROWS-1:0][COLS-1:0][NUM_DIR-1:0][TRACKS-1:0] t_in, t_out;
  logic [NT:0] chain;

  assign chain[0] = cfg_si;
  assign cfg_so   = chain[NT];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      // tracks arriving from the north come from the tile above (its south outputs)
      if (r == 0) begin : g_n_edge
        assign t_in[r][c][DIR_N] = io_n_in[c];
        assign io_n_out[c]       = t_out[r][c][DIR_N];
      end else begin : g_n
        assign t_in[r][c][DIR_N] = t_out[r-1][c][DIR_S];
      end
      if (r == ROWS-1) begin : g_s_edge
        assign t_in[r][c][DIR_S] = io_s_in[c];
        assign io_s_out[c]       = t_out[r][c][DIR_S];
      end else begin : g_s
        assign t_in[r][c][DIR_S] = t_out[r+1][c][DIR_N];
      end
      if (c == 0) begin : g_w_edge
        assign t_in[r][c][DIR_W] = io_w_in[r];
        assign io_w_out[r]       = t_out[r][c][DIR_W];
      end else begin : g_w
        assign t_in[r][c][DIR_W] = t_out[r][c-1][DIR_E];
      end
      if (c == COLS-1) begin : g_e_edge
        assign t_in[r][c][DIR_E] = io_e_in[r];
        assign io_e_out[r]       = t_out[r][c][DIR_E];
      end else begin : g_e
        assign t_in[r][c][DIR_E] = t_out[r][c+1][DIR_W];
      end

      fpga_tile u_tile (
        .cfg_clk(cfg_clk), .rst_n(rst_n), .cfg_shift(cfg_shift), .cfg_update(cfg_update),
        .cfg_si(chain[r*COLS+c]), .cfg_so(chain[r*COLS+c+1]),
        .trk_in(t_in[r][c]), .trk_out(t_out[r][c])
      );
    end
  end
endmodule
