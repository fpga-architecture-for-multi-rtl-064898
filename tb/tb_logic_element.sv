// tb_logic_element: random LE configurations and inputs; checks the four LE
// outputs against a reference: lo/hi from the table halves, lut7 from the
// full table, lut2 = lut2_table[{hi,lo}]. Also checks the dual-rail validity
// use: with lut2 = OR, o[3] is high exactly when one of the rails is high.
module tb_logic_element;
  import fpga_pkg::*;
  le_cfg_t          cfg;
  logic [LUT_K-1:0] x;
  logic [3:0]       o;
  int checks = 0, failures = 0;

  logic exp_lo, exp_hi, exp_l7, exp_l2;

  logic_element dut (.cfg(cfg), .x(x), .o(o));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      for (int w = 0; w < 4; w++) cfg.lut7[32*w +: 32] = $urandom;
      cfg.lut2 = 4'($urandom);
      x = 7'($urandom);
      #1;
      exp_lo = cfg.lut7[{1'b0, x[5:0]}];
      exp_hi = cfg.lut7[{1'b1, x[5:0]}];
      exp_l7 = x[6] ? exp_hi : exp_lo;
      exp_l2 = cfg.lut2[{exp_hi, exp_lo}];
      checks++;
      if (o !== {exp_l2, exp_l7, exp_hi, exp_lo}) begin
        failures++;
        $display("FAIL x=%h o=%b exp=%b", x, o, {exp_l2, exp_l7, exp_hi, exp_lo});
      end
    end
    // dual-rail: rail1 (hi) = x0, rail0 (lo) = x1, validity = OR
    for (int i = 0; i < 128; i++) cfg.lut7[i] = (i >= 64) ? i[0] : i[1];
    cfg.lut2 = 4'b1110;
    for (int i = 0; i < 4; i++) begin
      x = 7'(i);
      #1;
      checks++;
      if (o[3] !== (i != 0)) begin failures++; $display("FAIL validity in=%0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
