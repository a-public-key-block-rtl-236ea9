// gf2_matvec -- GF(2) matrix-vector multiplier with its own key matrix.
//
// Computes vec_out = M * vec_in over GF(2) for a loadable N x N bit matrix M.
// The decryption core uses two of these, one holding T^-1 (first step of
// decryption) and one holding S^-1 (last step).  Output coordinate r is the
// parity of row r ANDed with the input, so the whole product is one level of
// AND gates and N parity trees, registered once.
//
// Matrix storage: row r (1..N) is an N-bit vector whose bit [N-c] is the
// entry in column c, matching the block bit order of mqq_pkg.  It is written
// over the key-write port when key_wr.sel == SEL, at address
// (r-1)*WPR + w, WPR = ceil(N/32), word w carrying row bits [32w+31:32w].
//
// Timing: vec_in is sampled when in_valid is high; the product appears one
// cycle later with out_valid.  One product per cycle.
//
// The paper specifies only the operation (two n x n linear maps, 2n^2 bits of
// key); the one-cycle parallel structure and the key port are this design's.
module gf2_matvec
  import mqq_pkg::*;
#(
  parameter int unsigned N   = 160,
  parameter key_sel_e    SEL = KSEL_TINV
) (
  input  logic         clk,
  input  logic         rst_n,
  input  key_wr_t      key_wr,
  input  logic         in_valid,
  input  logic [N-1:0] vec_in,
  output logic         out_valid,
  output logic [N-1:0] vec_out
);
  localparam int unsigned WPR = (N + KW - 1) / KW;
  localparam int unsigned RW  = WPR * KW;

  logic [RW-1:0] rows [N];

  // Key write.
  always_ff @(posedge clk) begin
    if (key_wr.we && key_wr.sel == SEL && key_wr.addr < N * WPR)
      rows[key_wr.addr / WPR][(key_wr.addr % WPR) * KW +: KW] <= key_wr.data;
  end

  // Product, computed and registered when a block arrives.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      vec_out   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int unsigned r = 0; r < N; r++)
          vec_out[N-1-r] <= ^(rows[r][N-1:0] & vec_in);
    end
  end
endmodule
