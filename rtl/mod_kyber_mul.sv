// mod_kyber_mul: Barrett reduction modulo q = 3329 (ML-KEM).
//
// Reduces a product x < 2^25 of two 12-bit residues (the paper's figure feeds
// bits [24:0] of the 16 x 16 product) to x mod q. The quotient estimate is
// qh = (x * m) >> 26 with m = floor(2^26 / 3329) = 20158. Because
// x * (2^26/q - m) / 2^26 < 0.5 for x < 2^25, qh is at most one below the true
// quotient, so x - qh*q < 2q and one conditional subtraction of q finishes the
// reduction. The paper names Barrett reduction; k = 26 and the single
// correction step are this design's choice. Combinational; the butterfly
// places pipeline registers around it.
module mod_kyber_mul
  import uacc_pkg::*;
(
  input  logic [24:0] x_i,
  output logic [11:0] r_o
);
  logic [39:0] prod;
  logic [13:0] qh;
  logic [24:0] qq;
  logic [12:0] r0;
  always_comb begin
    prod = 40'(x_i) * 40'(BM_KYBER);
    qh   = prod[BK_KYBER +: 14];
    qq   = 25'(qh) * 25'(Q_KYBER);
    r0   = 13'(x_i - qq);
    r_o  = (r0 >= 13'(Q_KYBER)) ? 12'(r0 - 13'(Q_KYBER)) : r0[11:0];
  end
endmodule
