// mod_dilithium_mul: Barrett reduction modulo q = 8380417 (ML-DSA).
//
// Reduces a product x < 2^48 (the paper's figure feeds bits [47:0] of the
// Karatsuba result; the product of two 23-bit residues is below 2^46) to
// x mod q. The quotient estimate is qh = (x * m) >> 48 with
// m = floor(2^48 / 8380417) = 33587228. For x < q^2 < 2^46 the estimate
// error x * (2^48/q - m) / 2^48 is below 0.25, so qh is at most one below the
// true quotient, x - qh*q < 2q, and one conditional subtraction of q
// completes the reduction. The paper names Barrett reduction; k = 48 and the
// single correction step are this design's choice. Combinational.
module mod_dilithium_mul
  import uacc_pkg::*;
(
  input  logic [47:0] x_i,
  output logic [22:0] r_o
);
  logic [73:0] prod;
  logic [25:0] qh;
  logic [47:0] qq;
  logic [23:0] r0;
  always_comb begin
    prod = 74'(x_i) * 74'(BM_DIL);
    qh   = prod[BK_DIL +: 26];
    qq   = 48'(qh) * 48'(Q_DIL);
    r0   = 24'(x_i - qq);
    r_o  = (r0 >= 24'(Q_DIL)) ? 23'(r0 - 24'(Q_DIL)) : r0[22:0];
  end
endmodule
