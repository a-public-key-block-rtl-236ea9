// tb_ref_pkg -- reference arithmetic for the testbenches, written
// independently of the design: GF(2^13) products by full carry-less
// multiplication followed by reduction from the top bit down, and the
// Dobbertin map Dob(X) = X^129 + X^3 + X by square-and-multiply.
package tb_ref_pkg;
  localparam logic [13:0] REF_POLY = 14'h201B;  // x^13 + x^4 + x^3 + x + 1

  function automatic logic [12:0] ref_mul(input logic [12:0] a, input logic [12:0] b);
    logic [24:0] p;
    p = '0;
    for (int i = 0; i < 13; i++) if (a[i]) p ^= 25'(b) << i;
    for (int i = 24; i >= 13; i--) if (p[i]) p ^= 25'(REF_POLY) << (i - 13);
    return p[12:0];
  endfunction

  function automatic logic [12:0] ref_pow(input logic [12:0] a, input int unsigned e);
    logic [12:0] r, s;
    r = 13'd1; s = a;
    while (e != 0) begin
      if (e[0]) r = ref_mul(r, s);
      s = ref_mul(s, s);
      e >>= 1;
    end
    return r;
  endfunction

  function automatic logic [12:0] ref_dob(input logic [12:0] x);
    return ref_pow(x, 129) ^ ref_pow(x, 3) ^ x;
  endfunction
endpackage
