// tb_lut7_3: checks the LUT7-3 against direct table indexing for random
// tables and every input combination: lo = table[x[5:0]],
// hi = table[64+x[5:0]], lut7 = table[x].
module tb_lut7_3;
  import fpga_pkg::*;
  logic [LUT_BITS-1:0] tab;
  logic [LUT_K-1:0]    x;
  logic                lo, hi, l7;
  int checks = 0, failures = 0;

  lut7_3 dut (.table_i(tab), .x(x), .lo(lo), .hi(hi), .lut7(l7));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 8; n++) begin
      for (int w = 0; w < 4; w++) tab[32*w +: 32] = $urandom;
      for (int i = 0; i < LUT_BITS; i++) begin
        x = 7'(i);
        #1;
        checks++;
        if (l7 !== tab[i] || lo !== tab[i % 64] || hi !== tab[64 + i % 64]) begin
          failures++;
          $display("FAIL x=%0d lut7=%b lo=%b hi=%b", i, l7, lo, hi);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
