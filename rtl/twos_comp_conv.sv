// twos_comp_conv: conditional two's complement converter.
//
// In FFT mode the butterfly multiplies signed fixed-point numbers on unsigned
// Karatsuba multipliers. The paper places a 32-bit two's complement converter
// before and a 64-bit one after each multiplier. This module is both: with
// en_i high and the sign input neg_i high it outputs the two's complement
// (0 - x) of x_i, otherwise x_i unchanged. Before a multiplier it is driven with
// neg_i = sign bit of the operand, giving the magnitude (the magnitude of
// -2^(W-1) is 2^(W-1), still representable as unsigned W bits). After a
// multiplier neg_i is the XOR of the operand signs, restoring the signed
// product. In the NTT modes en_i is low and operands pass unchanged.
// Combinational; the paper gives the function, the circuit is the plain
// negate-and-select.
module twos_comp_conv #(
  parameter int unsigned W = 32
) (
  input  logic         en_i,
  input  logic         neg_i,
  input  logic [W-1:0] x_i,
  output logic [W-1:0] y_o
);
  always_comb y_o = (en_i && neg_i) ? (~x_i + W'(1)) : x_i;
endmodule
