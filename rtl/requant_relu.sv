// requant_relu: ReLU activation fused with requantisation to 8 bits.
//
// Each convolution of the network is followed by a ReLU. Here the ReLU is
// applied to the 32-bit accumulator of the convolution and the result is
// brought back to the 8-bit activation format in the same step:
//     y = min(127, max(0, acc >>> SHIFT))
// The shift is arithmetic (it floors) and the result saturates at 127, the
// largest positive 8-bit value. Since the shift is monotonic, shifting
// before or after the ReLU gives the same result. SHIFT sets the fixed-point
// scale between the accumulator and the next layer's input; it is a design
// parameter, not a trained value. Purely combinational.
module requant_relu #(
  parameter int unsigned ACC_W = 32,
  parameter int unsigned SHIFT = 8
) (
  input  logic signed [ACC_W-1:0] in_data,
  output logic signed [7:0]       out_data
);
  logic signed [ACC_W-1:0] shifted;

  always_comb begin
    shifted = in_data >>> SHIFT;
    if (shifted < 0)        out_data = 8'sd0;
    else if (shifted > 127) out_data = 8'sd127;
    else                    out_data = shifted[7:0];
  end

endmodule
