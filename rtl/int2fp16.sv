// int2fp16: unsigned integer to FP16 converter.
//
// The average-pooling unit divides each window sum by the window size,
// which arrives as an integer in the layer command (kernel_size) and must be
// turned into FP16 first; the paper names this int-FP converter and gives an
// example (169 -> 16'h5948). The conversion is combinational and rounds to
// nearest even; values above 65504 become +infinity.
module int2fp16 (
  input  logic [15:0]     value,
  output fp16_pkg::fp16_t result
);
  assign result = fp16_pkg::fp16_from_uint(value);
endmodule
