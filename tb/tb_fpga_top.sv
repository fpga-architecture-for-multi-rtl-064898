// tb_fpga_top: end-to-end test of the FPGA at its default size.
//
// Loads one configuration, through the serial chain, that holds two 1-bit
// full adders side by side, each in its own asynchronous style and both
// using a 4-phase handshake:
//   row 0, tiles (0,0)-(0,3): QDI dual-rail adder stage. First level: one LE
//     per rail (S0, S1, Co0, Co1), each a generalised C-element: its LUT7
//     output is fed back to x6, the x6=0 half sets the rail when all three
//     inputs are valid and the rail's function is true, the x6=1 half holds
//     it until all inputs are back to null. Second level, tile (0,2): output
//     C-elements C(rail, !ack_in), the two rails of one output in the two
//     halves of one LE, whose LUT2 gives that output's validity. Tile (0,3)
//     ANDs the two validities into the acknowledge to the sender. Inputs
//     enter from the west edge, outputs and acknowledges use the north edge.
//   row 3, tiles (3,0)-(3,2): bundled-data micropipeline adder. Input
//     controller c1 = C(req_in, !c2) and input latches in tile (3,0), the
//     PDE delays c1 into the request of the second stage; combinational sum
//     and carry in tile (3,1); output controller c2 = C(dreq, !ack_in) and
//     output latches in tile (3,2). c2 also travels back west to c1.
// The environment (senders and receivers) is modelled here. Checks: every
// adder result; QDI outputs neither early, nor dropped before all inputs
// return to null and the receiver acknowledges; micropipeline stage-to-stage
// latency (input controller firing to output request) equal to the
// programmed PDE delay; data held while a receiver stalls. Finally a second
// image, without the QDI adder, is shifted in and applied while
// micropipeline tokens keep flowing: they must all stay correct, and the
// QDI row must go inert. Each mechanism is counted and must occur at least
// once.
module tb_fpga_top;
  import fpga_pkg::*;

  localparam int unsigned NT      = ROWS*COLS;
  localparam int unsigned TOTAL   = NT*TILE_CFG_BITS;
  localparam int unsigned MP_DSEL = 3;                        // PDE setting in the micropipeline
  localparam int unsigned MP_DLY  = (MP_DSEL + 1)*PDE_UNIT;

  logic cfg_clk = 0, rst_n = 0, cfg_shift = 0, cfg_update = 0, cfg_si = 0, cfg_so;
  logic [COLS-1:0][TRACKS-1:0] io_n_in, io_n_out, io_s_in, io_s_out;
  logic [ROWS-1:0][TRACKS-1:0] io_w_in, io_w_out, io_e_in, io_e_out;

  fpga_top dut (.*);

  always #5 cfg_clk = ~cfg_clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_cfg_bits = 0, n_qdi_tokens = 0, n_qdi_hold = 0, n_qdi_wait = 0, n_done = 0;
  int n_qdi_stall = 0, n_reconfig = 0;
  time t_update, t_mp_done;
  int n_mp_tokens = 0, n_mp_stall = 0, n_pde = 0, n_mp_hold = 0;

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- configuration helpers ----------------
  tile_cfg_t tc [ROWS][COLS];

  function automatic logic [SB_SEL_W-1:0] trk(input dir_e d, input int t);
    return SB_SEL_W'(1 + int'(d)*TRACKS + t);
  endfunction
  function automatic logic [SB_SEL_W-1:0] plbo(input int le, input int j);
    return SB_SEL_W'(SB_PLB0 + le*LE_OUTS + j);
  endfunction
  function automatic logic [IM_SEL_W-1:0] pinsrc(input int p);
    return IM_SEL_W'(IM_PIN0 + p);
  endfunction
  function automatic logic [IM_SEL_W-1:0] fbsrc(input int le, input int j);
    return IM_SEL_W'(IM_FB0 + le*LE_FB + j);
  endfunction
  task automatic cb(input int r, input int c, input int p, input dir_e d, input int t);
    tc[r][c].cb_sel[p] = CB_SEL_W'(1 + int'(d)*TRACKS + t);
  endtask
  task automatic im(input int r, input int c, input int le, input int k, input logic [IM_SEL_W-1:0] s);
    tc[r][c].plb.im_sel[le*LUT_K + k] = s;
  endtask

  // QDI rail cell: fn 0..3 = S0, S1, Co0, Co1; x0..x5 = a0,a1,b0,b1,c0,c1, x6 = own output
  function automatic logic [LUT_BITS-1:0] qdi_table(input int fn);
    logic [LUT_BITS-1:0] t;
    for (int i = 0; i < LUT_BITS; i++) begin
      logic vall, nall, a, b, c, s, co, f;
      vall = (i[0] ^ i[1]) & (i[2] ^ i[3]) & (i[4] ^ i[5]);
      nall = (i[5:0] == 0);
      a = i[1]; b = i[3]; c = i[5];
      s = a ^ b ^ c; co = (a & b) | (a & c) | (b & c);
      case (fn) 0: f = !s; 1: f = s; 2: f = !co; default: f = co; endcase
      t[i] = i[6] ? !nall : (vall & f);
    end
    return t;
  endfunction

  // two-function table: hi half from fhi, lo half from flo, given as 64-entry truth tables
  function automatic logic [LUT_BITS-1:0] pair_table(input logic [63:0] fhi, input logic [63:0] flo);
    return {fhi, flo};
  endfunction

  function automatic logic [63:0] tt6_latch(input int en, input int q, input int d);
    logic [63:0] t;
    for (int i = 0; i < 64; i++) t[i] = i[en] ? i[q] : i[d];
    return t;
  endfunction
  // C(x_a, !x_b) with state x_s
  function automatic logic [63:0] tt6_cinv(input int xa, input int xb, input int xs);
    logic [63:0] t;
    for (int i = 0; i < 64; i++) t[i] = (i[xa] != i[xb]) ? i[xa] : i[xs];
    return t;
  endfunction

  task automatic build_config();
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) tc[r][c] = '0;
    // ---- QDI adder, row 0 ----
    for (int c = 0; c < 2; c++) begin
      for (int p = 0; p < 6; p++) cb(0, c, p, DIR_W, p);
      for (int le = 0; le < 2; le++) begin
        for (int k = 0; k < 6; k++) im(0, c, le, k, pinsrc(k));
        im(0, c, le, 6, fbsrc(le, LE_O_LUT7));
        tc[0][c].plb.le[le].lut7 = qdi_table(2*c + le);
      end
    end
    for (int t = 0; t < 6; t++) tc[0][0].sb_sel[DIR_E][t] = trk(DIR_W, t);   // forward inputs
    tc[0][0].sb_sel[DIR_E][6] = plbo(0, LE_O_LUT7);                          // S0 (first level)
    tc[0][0].sb_sel[DIR_E][7] = plbo(1, LE_O_LUT7);                          // S1
    tc[0][1].sb_sel[DIR_E][6] = trk(DIR_W, 6);
    tc[0][1].sb_sel[DIR_E][7] = trk(DIR_W, 7);
    tc[0][1].sb_sel[DIR_E][0] = plbo(0, LE_O_LUT7);                          // Co0 (first level)
    tc[0][1].sb_sel[DIR_E][1] = plbo(1, LE_O_LUT7);                          // Co1
    // tile (0,2): output C-elements C(rail, !ack_in), one dual-rail output per LE,
    // LUT2 = OR of the two rails = validity of that output
    cb(0, 2, 0, DIR_W, 6); cb(0, 2, 1, DIR_W, 7); cb(0, 2, 2, DIR_W, 0); cb(0, 2, 3, DIR_W, 1);
    cb(0, 2, 4, DIR_N, 0);                                                   // ack_in
    for (int le = 0; le < 2; le++) begin
      im(0, 2, le, 0, pinsrc(2*le)); im(0, 2, le, 1, pinsrc(2*le + 1)); im(0, 2, le, 2, pinsrc(4));
      im(0, 2, le, 3, fbsrc(le, LE_O_LO)); im(0, 2, le, 4, fbsrc(le, LE_O_HI));
      tc[0][2].plb.le[le].lut7 = pair_table(tt6_cinv(1, 2, 4), tt6_cinv(0, 2, 3));
      tc[0][2].plb.le[le].lut2 = 4'b1110;
    end
    tc[0][2].sb_sel[DIR_N][0] = plbo(0, LE_O_LO);                            // S0
    tc[0][2].sb_sel[DIR_N][1] = plbo(0, LE_O_HI);                            // S1
    tc[0][2].sb_sel[DIR_N][2] = plbo(1, LE_O_LO);                            // Co0
    tc[0][2].sb_sel[DIR_N][3] = plbo(1, LE_O_HI);                            // Co1
    tc[0][2].sb_sel[DIR_E][0] = plbo(0, LE_O_LUT2);                          // S valid
    tc[0][2].sb_sel[DIR_E][1] = plbo(1, LE_O_LUT2);                          // Co valid
    // tile (0,3): completion = S valid & Co valid -> acknowledge to the sender
    cb(0, 3, 0, DIR_W, 0); cb(0, 3, 1, DIR_W, 1);
    im(0, 3, 0, 0, pinsrc(0)); im(0, 3, 0, 1, pinsrc(1));
    begin
      logic [63:0] l;
      for (int i = 0; i < 64; i++) l[i] = i[0] & i[1];
      tc[0][3].plb.le[0].lut7 = pair_table('0, l);
    end
    tc[0][3].sb_sel[DIR_N][0] = plbo(0, LE_O_LO);                            // ack_out

    // ---- micropipeline adder, row 3 ----
    for (int p = 0; p < 4; p++) cb(3, 0, p, DIR_W, p);                      // A B Ci req
    cb(3, 0, 4, DIR_E, 0);                                                   // c2
    // LE0: qA (hi) / qB (lo), enable c1
    im(3, 0, 0, 0, fbsrc(1, LE_O_HI)); im(3, 0, 0, 1, pinsrc(0)); im(3, 0, 0, 2, pinsrc(1));
    im(3, 0, 0, 3, fbsrc(0, LE_O_HI)); im(3, 0, 0, 4, fbsrc(0, LE_O_LO));
    tc[3][0].plb.le[0].lut7 = pair_table(tt6_latch(0, 3, 1), tt6_latch(0, 4, 2));
    // LE1: c1 = C(req, !c2) (hi), qCi (lo)
    im(3, 0, 1, 0, pinsrc(3)); im(3, 0, 1, 1, pinsrc(4)); im(3, 0, 1, 2, fbsrc(1, LE_O_HI));
    im(3, 0, 1, 3, pinsrc(2)); im(3, 0, 1, 4, fbsrc(1, LE_O_LO));
    tc[3][0].plb.le[1].lut7 = pair_table(tt6_cinv(0, 1, 2), tt6_latch(2, 4, 3));
    // PDE: matched delay on c1
    tc[3][0].plb.im_sel[IM_SINK_PDE] = fbsrc(1, LE_O_HI);
    tc[3][0].plb.pde_sel = PDE_SEL_W'(MP_DSEL);
    tc[3][0].sb_sel[DIR_E][0] = plbo(0, LE_O_HI);
    tc[3][0].sb_sel[DIR_E][1] = plbo(0, LE_O_LO);
    tc[3][0].sb_sel[DIR_E][2] = plbo(1, LE_O_LO);
    tc[3][0].sb_sel[DIR_E][3] = SB_SEL_W'(SB_PLB0 + PLB_O_PDE);
    tc[3][0].sb_sel[DIR_S][0] = plbo(1, LE_O_HI);                            // ack_out
    // tile (3,1): S (hi) = xor3, Co (lo) = majority
    for (int p = 0; p < 3; p++) begin cb(3, 1, p, DIR_W, p); im(3, 1, 0, p, pinsrc(p)); end
    begin
      logic [63:0] h, l;
      for (int i = 0; i < 64; i++) begin
        h[i] = i[0] ^ i[1] ^ i[2];
        l[i] = (i[0] & i[1]) | (i[0] & i[2]) | (i[1] & i[2]);
      end
      tc[3][1].plb.le[0].lut7 = pair_table(h, l);
    end
    tc[3][1].sb_sel[DIR_E][3] = trk(DIR_W, 3);                               // dreq
    tc[3][1].sb_sel[DIR_E][0] = plbo(0, LE_O_HI);                            // S
    tc[3][1].sb_sel[DIR_E][1] = plbo(0, LE_O_LO);                            // Co
    tc[3][1].sb_sel[DIR_W][0] = trk(DIR_E, 0);                               // c2 back west
    // tile (3,2): c2 = C(dreq, !ack_in) (hi) and qS (lo); qCo in LE1
    cb(3, 2, 0, DIR_W, 3); cb(3, 2, 1, DIR_S, 0); cb(3, 2, 2, DIR_W, 0); cb(3, 2, 3, DIR_W, 1);
    im(3, 2, 0, 0, pinsrc(0)); im(3, 2, 0, 1, pinsrc(1)); im(3, 2, 0, 2, fbsrc(0, LE_O_HI));
    im(3, 2, 0, 3, pinsrc(2)); im(3, 2, 0, 4, fbsrc(0, LE_O_LO));
    tc[3][2].plb.le[0].lut7 = pair_table(tt6_cinv(0, 1, 2), tt6_latch(2, 4, 3));
    im(3, 2, 1, 0, fbsrc(0, LE_O_HI)); im(3, 2, 1, 1, pinsrc(3)); im(3, 2, 1, 2, fbsrc(1, LE_O_LO));
    tc[3][2].plb.le[1].lut7 = pair_table('0, tt6_latch(0, 2, 1));
    tc[3][2].sb_sel[DIR_W][0] = plbo(0, LE_O_HI);                            // c2
    tc[3][2].sb_sel[DIR_S][0] = plbo(0, LE_O_HI);                            // req_out
    tc[3][2].sb_sel[DIR_S][1] = plbo(0, LE_O_LO);                            // S
    tc[3][2].sb_sel[DIR_S][2] = plbo(1, LE_O_LO);                            // Co
  endtask

  task automatic load_config();
    logic [TOTAL-1:0] img;
    for (int k = 0; k < NT; k++) img[k*TILE_CFG_BITS +: TILE_CFG_BITS] = tc[k / COLS][k % COLS];
    @(negedge cfg_clk);
    cfg_shift = 1;
    for (int b = TOTAL-1; b >= 0; b--) begin
      cfg_si = img[b];
      @(negedge cfg_clk);
      n_cfg_bits++;
    end
    cfg_shift = 0;
    cfg_update = 1;
    @(negedge cfg_clk);
    cfg_update = 0;
  endtask

  // ---------------- QDI environment ----------------
  wire q_s0 = io_n_out[2][0], q_s1 = io_n_out[2][1];
  wire q_c0 = io_n_out[2][2], q_c1 = io_n_out[2][3];
  wire q_done = io_n_out[3][0];
  logic q_ack_in;
  assign io_n_in = {{(COLS-3)*TRACKS{1'b0}}, {(TRACKS-1){1'b0}}, q_ack_in} << (2*TRACKS);

  localparam int unsigned QDI_N = 16;
  logic [2:0] qdi_tok [QDI_N];

  task automatic qdi_send();
    int order[3];
    logic [5:0] rails;
    for (int n = 0; n < QDI_N; n++) begin
      rails = {qdi_tok[n][2], !qdi_tok[n][2], qdi_tok[n][1], !qdi_tok[n][1], qdi_tok[n][0], !qdi_tok[n][0]};
      order = '{0, 1, 2};
      order.shuffle();
      // raise the inputs one at a time: no output before the last one
      for (int j = 0; j < 3; j++) begin
        io_w_in[0][2*order[j] +: 2] = rails[2*order[j] +: 2];
        #10;
        if (j < 2) begin
          chk({q_s0, q_s1, q_c0, q_c1, q_done} == 0, "QDI output before all inputs valid");
          n_qdi_wait++;
        end
      end
      wait (q_done == 1'b1);
      n_done++;
      // return to null one input at a time: the outputs hold meanwhile
      order.shuffle();
      for (int j = 0; j < 3; j++) begin
        io_w_in[0][2*order[j] +: 2] = 2'b00;
        #10;
        if (j < 2) begin
          chk(q_done && (q_s0 | q_s1) && (q_c0 | q_c1), "QDI hold until inputs null");
          n_qdi_hold++;
        end
      end
      wait (q_done == 1'b0);
      n_qdi_tokens++;
    end
  endtask

  task automatic qdi_receive();
    logic s, co;
    for (int n = 0; n < QDI_N; n++) begin
      wait ((q_s0 | q_s1) && (q_c0 | q_c1));
      s  = ^qdi_tok[n];
      co = (qdi_tok[n][0] & qdi_tok[n][1]) | (qdi_tok[n][0] & qdi_tok[n][2]) | (qdi_tok[n][1] & qdi_tok[n][2]);
      #1;
      chk({q_s1, q_s0} == {s, !s} && {q_c1, q_c0} == {co, !co}, $sformatf("QDI token %0d sum/carry", n));
      // stall some tokens: outputs must hold after the inputs return to null
      if (n % 4 == 2) begin
        #100;
        chk(io_w_in[0][5:0] == 0 && {q_s1, q_s0} == {s, !s} && {q_c1, q_c0} == {co, !co},
            "QDI outputs held by missing acknowledge");
        n_qdi_stall++;
      end
      q_ack_in = 1'b1;
      wait ({q_s0, q_s1, q_c0, q_c1} == 4'b0);
      #5;
      q_ack_in = 1'b0;
    end
  endtask

  // ---------------- micropipeline environment ----------------
  wire mp_ack_out = io_s_out[0][0];
  wire mp_req_out = io_s_out[2][0];
  wire mp_s       = io_s_out[2][1];
  wire mp_co      = io_s_out[2][2];
  logic mp_ack_in;
  assign io_s_in = {{(COLS-1)*TRACKS{1'b0}}, {(TRACKS-1){1'b0}}, mp_ack_in} << (2*TRACKS);

  localparam int unsigned MP_N = 24;
  logic [2:0] mp_tok [MP_N];
  time t_req [MP_N];

  task automatic mp_send();
    for (int n = 0; n < MP_N; n++) begin
      io_w_in[3][2:0] = mp_tok[n];
      #7;
      io_w_in[3][3] = 1'b1;
      if (mp_req_out && !mp_ack_in) n_mp_stall++;   // receiver still holds the previous token
      wait (mp_ack_out == 1'b1);
      t_req[n] = $time;                              // input controller fired
      io_w_in[3][2:0] = 3'($urandom);                // data may change once acknowledged
      #3;
      io_w_in[3][3] = 1'b0;
      wait (mp_ack_out == 1'b0);
    end
  endtask

  task automatic mp_receive();
    logic s, co;
    for (int n = 0; n < MP_N; n++) begin
      wait (mp_req_out == 1'b1);
      s  = ^mp_tok[n];
      co = (mp_tok[n][0] & mp_tok[n][1]) | (mp_tok[n][0] & mp_tok[n][2]) | (mp_tok[n][1] & mp_tok[n][2]);
      chk(mp_s == s && mp_co == co, $sformatf("micropipeline token %0d sum/carry", n));
      // the second stage fires exactly one programmed PDE delay after the first
      chk($time - t_req[n] == time'(MP_DLY),
          $sformatf("micropipeline stage latency %0t, expected %0d", $time - t_req[n], MP_DLY));
      if ($time - t_req[n] == time'(MP_DLY)) n_pde++;
      // stall the receiver on some tokens: the output latch must hold
      if (n % 3 == 1) begin
        #(3*MP_DLY);
        chk(mp_s == s && mp_co == co, "micropipeline output held during stall");
        n_mp_hold++;
      end
      mp_ack_in = 1'b1;
      wait (mp_req_out == 1'b0);
      #5;
      mp_ack_in = 1'b0;
      n_mp_tokens++;
    end
  endtask

  initial begin
    io_e_in = '0; io_w_in = '0; mp_ack_in = 1'b0; q_ack_in = 1'b0;
    repeat (3) @(negedge cfg_clk);
    rst_n = 1;
    #20;
    chk(io_n_out == '0 && io_s_out == '0 && io_w_out == '0 && io_e_out == '0, "reset: fabric idle");
    build_config();
    load_config();
    #50;
    chk({q_s0, q_s1, q_c0, q_c1, q_done} == 0 && !mp_req_out && !mp_ack_out, "configured, idle");
    for (int n = 0; n < QDI_N; n++) qdi_tok[n] = 3'(n < 8 ? n : $urandom);
    for (int n = 0; n < MP_N; n++) mp_tok[n] = 3'(n < 8 ? n : $urandom);
    fork
      qdi_send();
      qdi_receive();
      mp_send();
      mp_receive();
    join

    // ---- reconfiguration while running: drop the QDI adder, keep the
    // micropipeline, and keep tokens flowing through it while the new image
    // is shifted in and applied
    build_config();
    for (int c = 0; c < COLS; c++) tc[0][c] = '0;
    fork
      begin
        load_config();
        t_update = $time;
      end
      begin
        repeat (4) begin
          for (int n = 0; n < MP_N; n++) mp_tok[n] = 3'($urandom);
          fork mp_send(); mp_receive(); join
        end
        t_mp_done = $time;
      end
    join
    if (t_update < t_mp_done) n_reconfig++;
    io_w_in[0][5:0] = 6'b101010;     // a valid QDI token into the now unconfigured row
    #50;
    chk({q_s0, q_s1, q_c0, q_c1, q_done} == 0, "QDI row inert after reconfiguration");
    io_w_in[0][5:0] = '0;

    $display("mechanisms: reconfig_while_running=%0d qdi_stall=%0d cfg_bits=%0d qdi_tokens=%0d qdi_wait=%0d qdi_hold=%0d done=%0d mp_tokens=%0d mp_stall=%0d pde_latency=%0d mp_hold=%0d",
             n_reconfig, n_qdi_stall, n_cfg_bits, n_qdi_tokens, n_qdi_wait, n_qdi_hold, n_done, n_mp_tokens, n_mp_stall, n_pde, n_mp_hold);
    chk(n_cfg_bits == 2*TOTAL, "configuration chain length (two images)");
    chk(n_qdi_tokens == QDI_N, "QDI tokens");
    chk(n_qdi_stall > 0, "QDI receiver stall exercised");
    chk(n_qdi_wait > 0, "QDI wait-for-all-inputs exercised");
    chk(n_qdi_hold > 0, "QDI hold exercised");
    chk(n_done > 0, "QDI completion detection exercised");
    chk(n_mp_tokens == 5*MP_N, "micropipeline tokens");
    chk(n_reconfig > 0, "reconfiguration while the fabric runs exercised");
    chk(n_mp_stall > 0, "micropipeline stall exercised");
    chk(n_pde > 0, "PDE-bounded latency observed");
    chk(n_mp_hold > 0, "micropipeline hold exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
