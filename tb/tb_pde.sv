// tb_pde: for every delay setting, toggles the input and measures when the
// output follows; expected delay (sel+1)*PDE_UNIT for both edges. Also checks
// that the output has not moved one time unit before it is due.
module tb_pde;
  import fpga_pkg::*;
  logic [PDE_SEL_W-1:0] sel;
  logic din, dout;
  int checks = 0, failures = 0;
  time t0, t1;

  pde dut (.sel(sel), .din(din), .dout(dout));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = 0; sel = 0;
    #5000;
    for (int s = 0; s < (1 << PDE_SEL_W); s++) begin
      sel = PDE_SEL_W'(s);
      for (int e = 0; e < 2; e++) begin
        #10;
        din = ~din;
        t0 = $time;
        #((s + 1) * PDE_UNIT - 1);
        checks++;
        if (dout === din) begin failures++; $display("FAIL sel=%0d early", s); end
        @(dout);
        t1 = $time;
        checks++;
        if (t1 - t0 != time'((s + 1) * PDE_UNIT) || dout !== din) begin
          failures++;
          $display("FAIL sel=%0d delay=%0t", s, t1 - t0);
        end
        #((s + 1) * PDE_UNIT);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
