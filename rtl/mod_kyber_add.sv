// mod_kyber_add: final reduction of an ML-KEM addition (q = 3329).
//
// The butterfly's shared 16-bit adder forms s = a + t with a, t < q, so
// s < 2q fits in 13 bits (the figure's [12:0] field). This unit subtracts q
// once when s >= q, giving (a + t) mod q on 12 bits. Combinational. The paper
// names the unit and says a conditional subtraction is used.
module mod_kyber_add
  import uacc_pkg::*;
(
  input  logic [12:0] s_i,
  output logic [11:0] r_o
);
  always_comb r_o = (s_i >= 13'(Q_KYBER)) ? 12'(s_i - 13'(Q_KYBER)) : s_i[11:0];
endmodule
