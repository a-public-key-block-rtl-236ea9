// dob_inv_rom -- table of the inverse Dobbertin bijection over GF(2^13).
//
// Decryption needs Z = Dob^-1(W) for a 13-bit word W, where
// Dob(X) = X^129 + X^3 + X (the Dobbertin bijection with m = 6).  Dob has no
// cheap closed-form inverse, so the design keeps a 2^13 x 13-bit table, as the
// paper does (106,496 bits).  Instead of shipping the table, the module
// builds it itself after reset: a counter walks X = 0 .. 8191, a
// combinational Dob unit computes Dob(X), and X is written at address Dob(X).
// This takes 8192 cycles; 'ready' rises when the table is complete.
//
// Lookup: present 'w' with 'rd_en'; 'z' = Dob^-1(w) is valid the next cycle
// (synchronous read, as a block RAM provides).  Reads before 'ready' return
// stale data; the decryption core waits for 'ready'.
//
// The field polynomial (x^13 + x^4 + x^3 + x + 1) and the bit order of W
// (W_1 = MSB) are this design's choices; the paper gives neither.  The
// self-filling sequencer is also this design's choice.
module dob_inv_rom
  import mqq_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  output logic            ready,
  input  logic            rd_en,
  input  logic [DOBW-1:0] w,
  output logic [DOBW-1:0] z
);
  logic [DOBW-1:0] mem [2**DOBW];
  logic [DOBW-1:0] fill_x;
  logic            filling;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill_x  <= '0;
      filling <= 1'b1;
      ready   <= 1'b0;
    end else if (filling) begin
      fill_x <= fill_x + 1'b1;
      if (&fill_x) begin
        filling <= 1'b0;
        ready   <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (filling) mem[dob(fill_x)] <= fill_x;
    if (rd_en)   z <= mem[w];
  end
endmodule
