// mqq_pkg -- shared types, constants and functions of the MQQ public key
// block cipher datapath.
//
// Bit numbering used throughout: an n-bit block holds the cipher coordinates
// x_1 .. x_n, and coordinate x_i sits at vector bit [n-i], so x_1 is the MSB.
// A block is cut into k = n/5 quasigroup elements; element X_j holds
// coordinates 5j-4 .. 5j and its first coordinate is its MSB, which makes the
// 5-bit value the ordinary binary number x_1 x_2 x_3 x_4 x_5 of the element.
//
// GF(2^13) for the Dobbertin bijection Dob(X) = X^(2^7+1) + X^3 + X (m = 6)
// is built on the primitive polynomial x^13 + x^4 + x^3 + x + 1; the field
// polynomial is this design's choice (the bijection holds for any choice).
// The 13-bit Dobbertin word (W_1 .. W_13) has W_1 as its MSB.
//
// Key material is written over one 32-bit key-write port (key_wr_t); the
// target memory is chosen by key_sel_e, and the address layout of each memory
// is given with the memory's module.
package mqq_pkg;

  // Quasigroup order 2^QD and number of private quasigroups.
  localparam int unsigned QD    = 5;
  localparam int unsigned NQG   = 8;
  // Dobbertin bijection: GF(2^DOBW), DOBW = 2m+1 with m = 6.
  localparam int unsigned DOB_M = 6;
  localparam int unsigned DOBW  = 2 * DOB_M + 1;
  localparam logic [DOBW:0] GF13_POLY = 14'b10_0000_0001_1011;
  // Key-write word width.
  localparam int unsigned KW    = 32;

  typedef enum logic [2:0] {
    KSEL_TINV = 3'd0,   // rows of T^-1
    KSEL_SINV = 3'd1,   // rows of S^-1
    KSEL_QG   = 3'd2,   // left parastrophe tables
    KSEL_IDX  = 3'd3,   // quasigroup index sequence I
    KSEL_PK   = 3'd4    // public key coefficient rows
  } key_sel_e;

  typedef struct packed {
    logic        we;
    key_sel_e    sel;
    logic [31:0] addr;
    logic [KW-1:0] data;
  } key_wr_t;

  // Number of monomials of a quadratic polynomial in n Boolean variables:
  // the constant plus x_i x_j for i <= j (x_i x_i = x_i are the linear terms).
  function automatic int unsigned n_monomials(input int unsigned n);
    return 1 + n * (n + 1) / 2;
  endfunction

  // Position of monomial x_i x_j (1 <= i <= j <= n) in the monomial vector;
  // position 0 is the constant.  Order: (1,1),(1,2)..(1,n),(2,2)..(n,n).
  function automatic int unsigned mono_index(input int unsigned n,
                                             input int unsigned i,
                                             input int unsigned j);
    int unsigned t;
    t = 1;
    for (int unsigned a = 1; a < i; a++) t += n - a + 1;
    return t + (j - i);
  endfunction

  // Index (1..8) of the quasigroup whose parastrophe produces X_i, i >= 2,
  // as written in the decryption algorithm: \1 for X_2, \2 for X_3 and
  // \_{3 + ((i+2) mod 6)} for i >= 4.
  function automatic int unsigned table5_qg(input int unsigned i);
    if (i == 2) return 1;
    if (i == 3) return 2;
    return 3 + ((i + 2) % 6);
  endfunction

  // GF(2^13) multiplication modulo GF13_POLY.
  function automatic logic [DOBW-1:0] gf13_mul(input logic [DOBW-1:0] a,
                                               input logic [DOBW-1:0] b);
    logic [DOBW-1:0] p, aa;
    p  = '0;
    aa = a;
    for (int i = 0; i < DOBW; i++) begin
      if (b[i]) p ^= aa;
      aa = aa[DOBW-1] ? ({aa[DOBW-2:0], 1'b0} ^ GF13_POLY[DOBW-1:0])
                      : {aa[DOBW-2:0], 1'b0};
    end
    return p;
  endfunction

  // Dob(X) = X^(2^(m+1)+1) + X^3 + X.
  function automatic logic [DOBW-1:0] dob(input logic [DOBW-1:0] x);
    logic [DOBW-1:0] x2, x3, xp;
    x2 = gf13_mul(x, x);
    x3 = gf13_mul(x2, x);
    xp = x;
    for (int i = 0; i <= DOB_M; i++) xp = gf13_mul(xp, xp);   // X^(2^(m+1))
    return gf13_mul(xp, x) ^ x3 ^ x;
  endfunction

endpackage
