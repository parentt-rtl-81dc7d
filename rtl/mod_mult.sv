// mod_mult: modular multiplier a*b mod q_i used inside the NTT/iNTT
// butterflies and as the point-wise multiplier between the NTT and iNTT.
//
// A V x V integer multiplier produces the 2V-bit product, which a Barrett
// unit with a 2V-bit input reduces. The paper names this block (Mod. Mult)
// and uses Barrett reduction with special primes; the split into a plain
// multiplier plus barrett_reduce is this design's. Combinational: the
// surrounding block registers the result.
module mod_mult
  import parentt_pkg::*;
#(
  parameter modulus_t M = MODULI[0]
) (
  input  coef_t a,
  input  coef_t b,
  output coef_t p
);
  logic [2*V-1:0] prod;
  assign prod = (2*V)'(a) * (2*V)'(b);

  barrett_reduce #(.W(2*V), .M(M)) u_red (.x(prod), .r(p));
endmodule
