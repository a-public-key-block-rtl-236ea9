// mqq_top -- MQQ public key block cipher coprocessor.
//
// Holds both directions of the cipher for N-bit blocks (N = 160 by default):
//   * mqq_encrypt: the public map y = P(x), fully pipelined, one block per
//     cycle, latency 2 (encryption and signature verification);
//   * mqq_decrypt: the private inverse x = S^-1(chain(Dob^-1(T^-1 y))), one
//     block at a time, N/5 + 4 cycles per block (decryption and signing).
// Both share one 32-bit key-write port (key_wr, see mqq_pkg) through which the
// host loads the public key coefficients, T^-1, S^-1, the eight quasigroup
// parastrophe tables and, optionally, the quasigroup index sequence.  Key
// generation itself is done off-chip.  After reset the decryption side is
// busy for 8192 cycles while it builds its Dobbertin inverse table.
//
// The paper implements the two directions as separate FPGA designs; placing
// them side by side behind one key port is this design's choice.
module mqq_top
  import mqq_pkg::*;
#(
  parameter int unsigned N = 160
) (
  input  logic         clk,
  input  logic         rst_n,
  input  key_wr_t      key_wr,
  // encryption / verification
  input  logic         enc_in_valid,
  input  logic [N-1:0] enc_x,
  output logic         enc_out_valid,
  output logic [N-1:0] enc_y,
  // decryption / signing
  input  logic         dec_start,
  input  logic [N-1:0] dec_y,
  output logic         dec_busy,
  output logic         dec_done,
  output logic [N-1:0] dec_x
);
  mqq_encrypt #(.N(N)) u_enc (
    .clk, .rst_n, .key_wr,
    .in_valid(enc_in_valid), .x(enc_x),
    .out_valid(enc_out_valid), .y(enc_y));

  mqq_decrypt #(.N(N)) u_dec (
    .clk, .rst_n, .key_wr,
    .start(dec_start), .y(dec_y),
    .busy(dec_busy), .done(dec_done), .x(dec_x));
endmodule
