// qg_parastrophe_ram -- storage for the left parastrophes of the eight
// private quasigroups of order 32.
//
// Entry (q, a, b) holds a \_q b, the unique x with a *_q x = b, for quasigroup
// q = 1..8 and 5-bit elements a, b.  Like the paper, the full 32 x 32 table of
// every parastrophe is kept (8 x 32 x 32 x 5 = 40,960 bits) so that one
// lookup per cycle is possible.
//
// Write: key_wr.sel == KSEL_QG, address {q-1 (3 bits), a (5), b (5)},
// data[4:0] = a \_q b.
// Read: asynchronous (distributed RAM); rd_data = table[rd_q][rd_a][rd_b] in
// the same cycle, with rd_q = q-1.
module qg_parastrophe_ram
  import mqq_pkg::*;
(
  input  logic          clk,
  input  key_wr_t       key_wr,
  input  logic [2:0]    rd_q,
  input  logic [QD-1:0] rd_a,
  input  logic [QD-1:0] rd_b,
  output logic [QD-1:0] rd_data
);
  logic [QD-1:0] mem [NQG * 2**(2*QD)];

  always_ff @(posedge clk) begin
    if (key_wr.we && key_wr.sel == KSEL_QG)
      mem[key_wr.addr[3+2*QD-1:0]] <= key_wr.data[QD-1:0];
  end

  assign rd_data = mem[{rd_q, rd_a, rd_b}];
endmodule
