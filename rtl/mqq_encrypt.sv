// mqq_encrypt -- MQQ public-key operation (encryption, or signature check).
//
// Evaluates the public key y = P(x): N quadratic polynomials in the N bits of
// the block.  Polynomial r is stored as a coefficient row over the monomial
// vector of pk_monomials (constant, then x_i x_j for i <= j), so
//     y_r = parity(coef_r AND monomials(x)).
// The whole key (N x (1 + N(N+1)/2) bits, 2,060,960 bits for N = 160) sits in
// registers so that every polynomial is evaluated in parallel, giving a fully
// pipelined unit that accepts one block per clock, as the paper reports for
// its FPGA encryption (160 bits per cycle: 44.27 Gbit/s at 276.7 MHz).
//
// Pipeline: stage 1 registers the monomial vector of the input block, stage 2
// registers the N parities.  in_valid/x in cycle t give out_valid/y in cycle
// t+2; a new block may enter every cycle.  The two-stage split is this
// design's choice; the paper does not describe the pipeline.
//
// Key write: key_wr.sel == KSEL_PK, address (r-1)*WPR + w with
// WPR = MW/32 words per row; word w holds coefficient bits [32w+31:32w] of
// the row (bit 0 = constant term).  Coordinate y_r is output bit [N-r].
module mqq_encrypt
  import mqq_pkg::*;
#(
  parameter int unsigned N = 160
) (
  input  logic         clk,
  input  logic         rst_n,
  input  key_wr_t      key_wr,
  input  logic         in_valid,
  input  logic [N-1:0] x,
  output logic         out_valid,
  output logic [N-1:0] y
);
  localparam int unsigned MW  = ((n_monomials(N) + KW - 1) / KW) * KW;
  localparam int unsigned WPR = MW / KW;

  logic [MW-1:0] coef [N];
  logic [MW-1:0] mono, mono_q;
  logic          v1;

  always_ff @(posedge clk) begin
    if (key_wr.we && key_wr.sel == KSEL_PK && key_wr.addr < N * WPR)
      coef[key_wr.addr / WPR][(key_wr.addr % WPR) * KW +: KW] <= key_wr.data;
  end

  pk_monomials #(.N(N), .MW(MW)) u_mono (.x, .m(mono));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
      mono_q    <= '0;
      y         <= '0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
      if (in_valid) mono_q <= mono;
      if (v1)
        for (int unsigned r = 0; r < N; r++)
          y[N-1-r] <= ^(coef[r] & mono_q);
    end
  end
endmodule
