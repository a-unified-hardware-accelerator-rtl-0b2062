// mod_kyber_sub: final reduction of an ML-KEM subtraction (q = 3329).
//
// The butterfly's shared 16-bit subtractor forms d = a - t with a, t < q in
// two's complement, so -q < d < q and bits [12:0] (the figure's field) hold d
// as a 13-bit signed number. When d is negative (bit 12 set) this unit adds q,
// giving (a - t) mod q on 12 bits. Combinational. The paper names the unit and
// says a conditional addition is used.
module mod_kyber_sub
  import uacc_pkg::*;
(
  input  logic [12:0] d_i,
  output logic [11:0] r_o
);
  always_comb r_o = d_i[12] ? 12'(d_i + 13'(Q_KYBER)) : d_i[11:0];
endmodule
