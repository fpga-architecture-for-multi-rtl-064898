// plb: Programmable Logic Block.
//
// Structure from the paper: an interconnect matrix (IM), two logic elements
// (LEs) and a programmable delay element (PDE). The IM feeds the 7 inputs of
// each LE and the PDE input from the PLB pins, from the three LUT7-3 outputs
// of both LEs (feedback) and from the PDE output. Memory elements needed by
// asynchronous logic (Muller C-elements, latches) are made by feeding an LE
// output back to one of its own inputs through the IM. The pin count and the
// choice of PLB outputs (all four outputs of each LE, then the PDE output) are
// this design's.
//
// Combinational apart from the PDE delay. The IM-LE feedback is a structural
// combinational loop by design: it only closes when configured, and is how
// state is held in this asynchronous fabric.
module plb
  import fpga_pkg::*;
(
  input  plb_cfg_t              cfg,
  input  logic [PLB_IN-1:0]     pin,
  output logic [PLB_OUT-1:0]    pout
);
  logic [IM_SRCS-1:1]               im_src;   // IM source 0 is VSS
  logic [IM_SINKS-1:0]              im_sink;
  logic [NUM_LE-1:0][LE_OUTS-1:0]   le_o;
  logic                             pde_o;

  always_comb begin
    im_src           = '0;
    for (int unsigned p = 0; p < PLB_IN; p++) im_src[IM_PIN0 + p] = pin[p];
    for (int unsigned l = 0; l < NUM_LE; l++)
      for (int unsigned j = 0; j < LE_FB; j++)
        im_src[IM_FB0 + LE_FB*l + j] = le_o[l][j];
    im_src[IM_PDE]   = pde_o;
  end

  interconnect_matrix u_im (.sel(cfg.im_sel), .src(im_src), .sink(im_sink));

  for (genvar l = 0; l < NUM_LE; l++) begin : g_le
    logic_element u_le (
      .cfg (cfg.le[l]),
      .x   (im_sink[l*LUT_K +: LUT_K]),
      .o   (le_o[l])
    );
  end

  pde u_pde (.sel(cfg.pde_sel), .din(im_sink[IM_SINK_PDE]), .dout(pde_o));

  assign pout = {pde_o, le_o};
endmodule
