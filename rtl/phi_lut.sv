// phi_lut -- quantized check-node function phi(x) = -ln(tanh(x/2)).
//
// The check-node rule of belief propagation multiplies tanh(m/2) over the incoming
// messages. Taking -ln of the magnitudes turns the product into a sum, and phi is its
// own inverse, so |C2V_i| = phi( sum_j phi(|V2C_j|) - phi(|V2C_i|) ). This module is that
// phi for one value: x and y are unsigned 5-bit magnitudes with 2 fractional bits
// (0 .. 7.75). Entry i holds round(4 * phi(i/4)), saturated at 31; phi(0) is infinite
// and maps to 31. The rule itself is the one the decoder evaluates; the word length,
// the rounding and the saturation are this design's choice.
//
// Purely combinational, no clock.
module phi_lut
  import ldpc_pkg::*;
(
  input  logic [QMAG-1:0] x,
  output logic [QMAG-1:0] y
);

  always_comb begin
    unique case (x)
      5'd0:    y = 5'd31;
      5'd1:    y = 5'd8;
      5'd2:    y = 5'd6;
      5'd3:    y = 5'd4;
      5'd4:    y = 5'd3;
      5'd5,
      5'd6:    y = 5'd2;
      5'd7,
      5'd8,
      5'd9,
      5'd10,
      5'd11:   y = 5'd1;
      default: y = 5'd0;
    endcase
  end

endmodule
