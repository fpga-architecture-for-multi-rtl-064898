// tb_connection_box: random selections and track values; every PLB pin
// must carry the selected incoming track (index 1+dir*TRACKS+track) or 0.
module tb_connection_box;
  import fpga_pkg::*;
  logic [PLB_IN-1:0][CB_SEL_W-1:0]   sel;
  logic [NUM_DIR-1:0][TRACKS-1:0]    trk;
  logic [PLB_IN-1:0]                 pin;
  int checks = 0, failures = 0;
  int s;
  logic e;

  connection_box dut (.sel(sel), .trk_in(trk), .pin(pin));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 1000; n++) begin
      for (int p = 0; p < PLB_IN; p++) begin s = int'($urandom_range(CB_SRCS - 1, 0)); sel[p] = CB_SEL_W'(s); end
      trk = (NUM_DIR*TRACKS)'($urandom);
      #1;
      for (int p = 0; p < PLB_IN; p++) begin
        s = int'(sel[p]);
        e = (s == 0 || s >= CB_SRCS) ? 1'b0 : trk[(s-1)/TRACKS][(s-1)%TRACKS];
        checks++;
        if (pin[p] !== e) begin failures++; $display("FAIL pin %0d sel %0d", p, s); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
