// pk_monomials -- monomial expander of the public-key evaluator.
//
// A public key polynomial in n Boolean variables has 1 + n(n+1)/2
// coefficients: the constant and one per product x_i x_j with i <= j (the
// squares x_i x_i = x_i carry the linear terms).  This combinational module
// forms all those monomials of one input block, so that every public
// polynomial becomes a bitwise AND with its coefficient row followed by a
// parity (see mqq_encrypt).
//
// Output layout: m[0] = 1, and x_i x_j is at m[mono_index(N, i, j)], in the
// order (1,1),(1,2)..(1,N),(2,2)..(N,N); bits above the last monomial (up to
// the padded width MW, a multiple of 32) are zero.  Input coordinate x_i is at
// x[N-i], as everywhere in this design.  Purely combinational.
module pk_monomials
  import mqq_pkg::*;
#(
  parameter int unsigned N  = 160,
  parameter int unsigned MW = ((n_monomials(N) + KW - 1) / KW) * KW
) (
  input  logic [N-1:0]  x,
  output logic [MW-1:0] m
);
  always_comb begin
    int unsigned t;
    m    = '0;
    m[0] = 1'b1;
    t    = 1;
    for (int unsigned i = 1; i <= N; i++)
      for (int unsigned j = i; j <= N; j++) begin
        m[t] = x[N-i] & x[N-j];
        t++;
      end
  end
endmodule
