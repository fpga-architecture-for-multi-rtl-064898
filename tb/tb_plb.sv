// tb_plb: configures one PLB the way asynchronous logic uses it and checks
// its behaviour against reference models over a random input sequence.
//   LE0: Muller C-element. Inputs a (pin0), b (pin1) and its own LUT7 output
//        fed back through the IM to x6. Table half x6=0 is a&b (set), half
//        x6=1 is a|b (hold until both low).
//   LE1: D latch, q = en ? d : q, en (pin2), d (pin3), q fed back from its
//        own lo output to x2; hi = pin4; LUT2 = hi XOR lo.
//   PDE: delays the C-element output by setting 2, i.e. 3*PDE_UNIT.
module tb_plb;
  import fpga_pkg::*;
  plb_cfg_t           cfg;
  logic [PLB_IN-1:0]  pin;
  logic [PLB_OUT-1:0] pout;
  int checks = 0, failures = 0;
  logic c_ref, q_ref;
  int c_set = 0, c_hold = 0;

  plb dut (.cfg(cfg), .pin(pin), .pout(pout));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    cfg = '0;
    pin = '0;
    // LE0: C-element
    for (int i = 0; i < LUT_BITS; i++)
      cfg.le[0].lut7[i] = i[6] ? (i[0] | i[1]) : (i[0] & i[1]);
    cfg.im_sel[0*LUT_K + 0] = IM_SEL_W'(IM_PIN0 + 0);
    cfg.im_sel[0*LUT_K + 1] = IM_SEL_W'(IM_PIN0 + 1);
    cfg.im_sel[0*LUT_K + 6] = IM_SEL_W'(IM_FB0 + 0*LE_FB + 2);
    // LE1: latch in lo, pass-through in hi
    for (int i = 0; i < LUT_BITS; i++)
      cfg.le[1].lut7[i] = i[6] ? i[3] : (i[0] ? i[1] : i[2]);
    cfg.le[1].lut2 = 4'b0110;
    cfg.im_sel[1*LUT_K + 0] = IM_SEL_W'(IM_PIN0 + 2);
    cfg.im_sel[1*LUT_K + 1] = IM_SEL_W'(IM_PIN0 + 3);
    cfg.im_sel[1*LUT_K + 2] = IM_SEL_W'(IM_FB0 + 1*LE_FB + 0);
    cfg.im_sel[1*LUT_K + 3] = IM_SEL_W'(IM_PIN0 + 4);
    // PDE on the C-element output
    cfg.im_sel[IM_SINK_PDE] = IM_SEL_W'(IM_FB0 + 0*LE_FB + 2);
    cfg.pde_sel = 3'd2;
    // loops power up in an arbitrary state: bring them to 0 through their inputs
    pin[0] = 0; pin[1] = 0; pin[2] = 1; pin[3] = 0;
    #(4*PDE_UNIT);
    pin[2] = 0;
    #1;
    c_ref = 0; q_ref = 0;
    chk(pout[2] == 0 && pout[4] == 0 && pout[PLB_O_PDE] == 0, "initial state");
    for (int n = 0; n < 400; n++) begin
      pin[4:0] = 5'($urandom);
      if (pin[0] == pin[1]) begin c_set += (c_ref != pin[0]); c_ref = pin[0]; end
      else c_hold++;
      if (pin[2]) q_ref = pin[3];
      #1;
      chk(pout[0*LE_OUTS + 2] == c_ref, "C-element");
      chk(pout[1*LE_OUTS + 0] == q_ref, "latch");
      chk(pout[1*LE_OUTS + 3] == (q_ref ^ pin[4]), "LUT2");
      #(3*PDE_UNIT - 2);
      chk(pout[PLB_O_PDE] != c_ref || pout[2] == pout[PLB_O_PDE], "PDE not early");
      #2;
      chk(pout[PLB_O_PDE] == c_ref, "PDE delayed C-element");
    end
    chk(c_set > 10 && c_hold > 10, "C-element both set/reset and hold exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
