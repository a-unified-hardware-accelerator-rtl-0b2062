// mod_dilithium_add: final reduction of an ML-DSA addition (q = 8380417).
//
// The butterfly's pair of carry-chained 16-bit adders forms s = a + t with
// a, t < q, delivered as the figure's fields [24:16] and [15:0] (s < 2q < 2^24).
// This unit subtracts q once when s >= q, giving (a + t) mod q on 23 bits.
// Combinational. The paper names the unit and says a conditional subtraction
// is used.
module mod_dilithium_add
  import uacc_pkg::*;
(
  input  logic [24:0] s_i,
  output logic [22:0] r_o
);
  always_comb r_o = (s_i >= 25'(Q_DIL)) ? 23'(s_i - 25'(Q_DIL)) : s_i[22:0];
endmodule
