// mod_dilithium_sub: final reduction of an ML-DSA subtraction (q = 8380417).
//
// The butterfly's pair of borrow-chained 16-bit subtractors forms d = a - t
// with a, t < q in two's complement; bits [24:0] hold it as a 25-bit signed
// number (-q < d < q). When d is negative (bit 24 set) this unit adds q,
// giving (a - t) mod q on 23 bits. Combinational. The paper names the unit and
// says a conditional addition is used.
module mod_dilithium_sub
  import uacc_pkg::*;
(
  input  logic [24:0] d_i,
  output logic [22:0] r_o
);
  always_comb r_o = d_i[24] ? 23'(d_i + 25'(Q_DIL)) : d_i[22:0];
endmodule
