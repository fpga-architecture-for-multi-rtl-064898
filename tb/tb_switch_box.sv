// tb_switch_box: random selections, track and PLB-output values; every
// outgoing track must carry VSS, the selected incoming track, or the
// selected PLB output.
module tb_switch_box;
  import fpga_pkg::*;
  logic [NUM_DIR-1:0][TRACKS-1:0][SB_SEL_W-1:0] sel;
  logic [NUM_DIR-1:0][TRACKS-1:0]               tin, tout;
  logic [PLB_OUT-1:0]                           po;
  int checks = 0, failures = 0;
  int s;
  logic e;

  switch_box dut (.sel(sel), .trk_in(tin), .plb_out(po), .trk_out(tout));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 1000; n++) begin
      for (int d = 0; d < NUM_DIR; d++)
        for (int t = 0; t < TRACKS; t++) begin
          s = int'($urandom_range(SB_SRCS - 1, 0));
          sel[d][t] = SB_SEL_W'(s);
        end
      tin = (NUM_DIR*TRACKS)'($urandom);
      po  = PLB_OUT'($urandom);
      #1;
      for (int d = 0; d < NUM_DIR; d++)
        for (int t = 0; t < TRACKS; t++) begin
          s = int'(sel[d][t]);
          if (s == 0 || s >= SB_SRCS) e = 1'b0;
          else if (s < SB_PLB0)   e = tin[(s-1)/TRACKS][(s-1)%TRACKS];
          else                    e = po[s-SB_PLB0];
          checks++;
          if (tout[d][t] !== e) begin failures++; $display("FAIL out %0d/%0d sel %0d", d, t, s); end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
