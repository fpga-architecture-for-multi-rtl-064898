// tb_interconnect_matrix: random select fields and source values; each sink
// must carry the selected source, and source 0 (VSS) must read 0.
module tb_interconnect_matrix;
  import fpga_pkg::*;
  logic [IM_SINKS-1:0][IM_SEL_W-1:0] sel;
  logic [IM_SRCS-1:1]                src;
  logic [IM_SINKS-1:0]               sink;
  int checks = 0, failures = 0;

  interconnect_matrix dut (.sel(sel), .src(src), .sink(sink));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 1000; n++) begin
      for (int k = 0; k < IM_SINKS; k++) sel[k] = IM_SEL_W'($urandom_range(IM_SRCS - 1, 0));
      src = (IM_SRCS-1)'($urandom);
      #1;
      for (int k = 0; k < IM_SINKS; k++) begin
        checks++;
        if (sink[k] !== ((sel[k] == 0) ? 1'b0 : src[sel[k]])) begin
          failures++;
          $display("FAIL sink %0d sel %0d got %b", k, sel[k], sink[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
