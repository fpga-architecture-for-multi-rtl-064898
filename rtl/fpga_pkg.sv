// fpga_pkg: sizes, configuration record layouts and index encodings shared by
// every block of the asynchronous-logic FPGA fabric.
//
// The fabric is an island-style array of Programmable Logic Blocks (PLBs),
// each made of an Interconnect Matrix (IM), two Logic Elements (LEs) and a
// Programmable Delay Element (PDE). An LE is a 7-input, 3-output LUT (LUT7-3)
// followed by a 2-input LUT. The LUT sizes, the LE count per PLB and the
// presence of the PDE and of the feedback paths follow the paper; the PLB pin
// count, the channel width, the array size and the configuration layout are
// choices of this implementation.
package fpga_pkg;

  // ---- Logic element (paper: LUT7-3 + LUT2-1) -------------------------------
  localparam int unsigned LUT_K      = 7;              // LUT7-3 inputs
  localparam int unsigned LUT_BITS   = 1 << LUT_K;     // 128 SRAM bits
  localparam int unsigned LUT2_BITS  = 4;              // LUT2-1 table
  localparam int unsigned LE_OUTS    = 4;              // lo, hi, lut7, lut2
  localparam int unsigned LE_FB      = 3;              // LUT7-3 outputs fed back to the IM

  // LE output positions
  localparam int unsigned LE_O_LO    = 0;  // 6-input half, table[63:0]
  localparam int unsigned LE_O_HI    = 1;  // 6-input half, table[127:64]
  localparam int unsigned LE_O_LUT7  = 2;  // x6 ? hi : lo
  localparam int unsigned LE_O_LUT2  = 3;  // LUT2-1(hi, lo)

  // ---- Programmable logic block ---------------------------------------------
  localparam int unsigned NUM_LE     = 2;              // paper: two LEs per PLB
  localparam int unsigned PLB_IN     = 8;              // assumed PLB input pins
  localparam int unsigned PDE_SEL_W  = 3;              // assumed: 8 delay settings
  localparam int unsigned PDE_UNIT   = 100;            // assumed delay step (time units)
  localparam int unsigned IM_SINKS   = NUM_LE*LUT_K + 1;               // 14 LUT inputs + PDE input
  localparam int unsigned IM_SRCS    = 1 + PLB_IN + NUM_LE*LE_FB + 1;  // VSS, pins, feedback, PDE
  localparam int unsigned IM_SEL_W   = $clog2(IM_SRCS);
  localparam int unsigned PLB_OUT    = NUM_LE*LE_OUTS + 1;             // 8 LE outputs + PDE output

  // IM source indices
  localparam int unsigned IM_VSS     = 0;
  localparam int unsigned IM_PIN0    = 1;                        // PLB input pin p -> 1+p
  localparam int unsigned IM_FB0     = 1 + PLB_IN;               // LE l output j -> IM_FB0+3*l+j
  localparam int unsigned IM_PDE     = 1 + PLB_IN + NUM_LE*LE_FB;
  // IM sink index of the PDE input (LE l input k is l*LUT_K+k)
  localparam int unsigned IM_SINK_PDE = NUM_LE*LUT_K;

  // PLB output index of the PDE output (LE l output j is l*LE_OUTS+j)
  localparam int unsigned PLB_O_PDE  = NUM_LE*LE_OUTS;

  // ---- Routing network --------------------------------------------------------
  localparam int unsigned TRACKS     = 8;              // assumed channel width per direction
  localparam int unsigned NUM_DIR    = 4;
  localparam int unsigned CB_SRCS    = 1 + NUM_DIR*TRACKS;
  localparam int unsigned CB_SEL_W   = $clog2(CB_SRCS);
  localparam int unsigned SB_SRCS    = 1 + NUM_DIR*TRACKS + PLB_OUT;
  localparam int unsigned SB_SEL_W   = $clog2(SB_SRCS);
  localparam int unsigned SB_PLB0    = 1 + NUM_DIR*TRACKS;       // SB source of PLB output p

  // ---- Array ----------------------------------------------------------------------
  localparam int unsigned ROWS       = 4;              // assumed
  localparam int unsigned COLS       = 4;              // assumed

  typedef enum logic [1:0] {DIR_N = 2'd0, DIR_E = 2'd1, DIR_S = 2'd2, DIR_W = 2'd3} dir_e;

  // ---- Configuration records -------------------------------------------------------
  typedef struct packed {
    logic [LUT_BITS-1:0]  lut7;   // LUT7-3 SRAM, bit i = f(x6..x0 == i)
    logic [LUT2_BITS-1:0] lut2;   // LUT2-1 table, bit {hi,lo}
  } le_cfg_t;

  typedef struct packed {
    le_cfg_t [NUM_LE-1:0]                le;
    logic    [IM_SINKS-1:0][IM_SEL_W-1:0] im_sel;
    logic    [PDE_SEL_W-1:0]              pde_sel;
  } plb_cfg_t;

  typedef struct packed {
    plb_cfg_t                                       plb;
    logic [PLB_IN-1:0][CB_SEL_W-1:0]                cb_sel;
    logic [NUM_DIR-1:0][TRACKS-1:0][SB_SEL_W-1:0]   sb_sel;
  } tile_cfg_t;

  localparam int unsigned TILE_CFG_BITS = $bits(tile_cfg_t);

endpackage
