// config_register: configuration memory of one tile.
//
// Holds the bits that the paper's figures show as the LUT SRAM, together with
// the select fields of the interconnect matrix, PDE, connection box and switch
// box. How the configuration is loaded is not described in the paper; this
// design uses a shift chain with a shadow copy. While shift_en is high, bits
// enter at si on each rising edge of cfg_clk (shadow <= {shadow, si}) and
// leave at so (the shadow MSB), so tiles chain. A one-cycle update copies the
// shadow into the active bits that drive the fabric. Reset clears the active
// bits, which makes every multiplexer select VSS and every LUT output 0, so
// the fabric holds no loop that could oscillate until a full image is loaded.
// rst_n is an asynchronous reset; its other use is only to disable the
// handshake assertion below, which lint reports as a synchronous use.
module config_register #(
  parameter int unsigned N = 16
)(
  input  logic         cfg_clk,
  input  logic         rst_n,
  input  logic         shift_en,
  input  logic         update,
  input  logic         si,
  output logic         so,
  output logic [N-1:0] cfg_q
);
  logic [N-1:0] shadow;

  always_ff @(posedge cfg_clk or negedge rst_n) begin
    if (!rst_n) begin
      shadow <= '0;
      cfg_q  <= '0;
    end else begin
      if (shift_en) shadow <= {shadow[N-2:0], si};
      if (update)   cfg_q  <= shadow;
    end
  end

  assign so = shadow[N-1];

  // Shifting and updating in the same cycle would load a half-shifted image.
  a_no_shift_update: assert property (@(posedge cfg_clk) disable iff (!rst_n)
                                      !(shift_en && update));
endmodule
