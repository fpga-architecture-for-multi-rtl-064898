// tb_lut2_1: exhaustive check of the 2-input LUT over all 16 tables and
// all 4 input pairs: y = table[{a,b}].
module tb_lut2_1;
  import fpga_pkg::*;
  logic [3:0] tab;
  logic a, b, y;
  int checks = 0, failures = 0;

  lut2_1 dut (.table_i(tab), .a(a), .b(b), .y(y));

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 16; t++)
      for (int i = 0; i < 4; i++) begin
        tab = 4'(t); {a, b} = 2'(i);
        #1;
        checks++;
        if (y !== t[i]) begin failures++; $display("FAIL tab=%h in=%0d y=%b", t, i, y); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
