// tb_config_register: shifts a random image into the shadow chain, checks
// that the active bits stay cleared until update, that update loads the
// image exactly, that the serial output delays the input by N clocks, and
// that reset clears the active bits.
module tb_config_register;
  localparam int unsigned N = 37;
  logic clk = 0, rst_n = 0, sh = 0, up = 0, si = 0, so;
  logic [N-1:0] q, img;
  logic [2*N-1:0] stream;
  int checks = 0, failures = 0;

  config_register #(.N(N)) dut (.cfg_clk(clk), .rst_n(rst_n), .shift_en(sh), .update(up),
                                .si(si), .so(so), .cfg_q(q));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    chk(q == '0, "reset value");
    for (int r = 0; r < 3; r++) begin
      for (int b = 0; b < N; b++) img[b] = 1'($urandom);
      stream = {img, N'(0)};
      sh = 1;
      for (int b = N-1; b >= 0; b--) begin
        si = img[b];
        @(negedge clk);
      end
      sh = 0;
      chk(q != img || r > 0 || img == '0, "active bits changed before update");
      up = 1; @(negedge clk); up = 0;
      chk(q == img, "image after update");
      // serial out: next N shifted bits come out as the image MSB first
      sh = 1;
      for (int b = N-1; b >= 0; b--) begin
        chk(so == img[b], "serial out");
        si = 0;
        @(negedge clk);
      end
      sh = 0;
      chk(q == img, "active bits held while shifting");
    end
    rst_n = 0; #1; rst_n = 1;
    chk(q == '0, "async reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
