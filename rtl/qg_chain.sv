// qg_chain -- the quasigroup string step of MQQ decryption.
//
// Given y' = Y_1 Y_2 .. Y_k (k = N/5 elements of 5 bits), it produces
// x' = X_1 .. X_k with
//     X_1 = Y_1,   X_i = X_{i-1} \_{q(i)} Y_i   (i = 2 .. k),
// where \_q is the left parastrophe of private quasigroup q.  This undoes the
// string transformation Y_{j+1} = X_j *_{i_j} X_{j+1} of key generation
// (Theorem 1 of quasigroup string transformations).  Each X_i needs the one
// before it, so the module does one parastrophe lookup per cycle through an
// external lookup port (qg_parastrophe_ram) and keeps X_{i-1} in a register.
//
// Quasigroup index sequence: q(i) for i = 2..k is held in a small register
// file, entry i-1 storing q(i)-1.  After reset it holds the sequence written in
// the paper's decryption algorithm (\1, \2, then \_{3+((i+2) mod 6)}).  The
// paper's key-generation procedure instead allows any sequence I in which
// quasigroups 1 and 2 are used eight times in total, and says I may be public
// or private, so the sequence can be overwritten over the key port:
// key_wr.sel == KSEL_IDX, address i-1 (1 .. k-1), data[2:0] = q(i)-1.
//
// Timing: 'start' (ignored while busy) samples y; 'done' is high k cycles
// after the cycle of start (one lookup per cycle for X_2..X_k), with x valid;
// x holds until the next start.
module qg_chain
  import mqq_pkg::*;
#(
  parameter int unsigned N = 160
) (
  input  logic          clk,
  input  logic          rst_n,
  input  key_wr_t       key_wr,
  input  logic          start,
  input  logic [N-1:0]  y,
  output logic          busy,
  output logic          done,
  output logic [N-1:0]  x,
  // parastrophe lookup port
  output logic [2:0]    rd_q,
  output logic [QD-1:0] rd_a,
  output logic [QD-1:0] rd_b,
  input  logic [QD-1:0] rd_data
);
  localparam int unsigned K  = N / QD;
  localparam int unsigned IW = $clog2(K + 1);

  logic [2:0]    idx [K];
  logic [N-1:0]  yreg;
  logic [QD-1:0] xprev;
  logic [IW-1:0] i;

  // Index sequence register file.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned j = 0; j < K; j++)
        idx[j] <= (j == 0) ? 3'd0 : 3'(table5_qg(j + 1) - 1);
    end else if (key_wr.we && key_wr.sel == KSEL_IDX && key_wr.addr < K) begin
      idx[key_wr.addr] <= key_wr.data[2:0];
    end
  end

  assign rd_q = idx[$clog2(K)'(i - 1'b1)];
  assign rd_a = xprev;
  assign rd_b = yreg[N - QD * i +: QD];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      i     <= IW'(1);
      xprev <= '0;
      yreg  <= '0;
      x     <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          yreg  <= y;
          x     <= {y[N-1 -: QD], {(N-QD){1'b0}}};
          xprev <= y[N-1 -: QD];
          i     <= IW'(2);
          busy  <= 1'b1;
        end
      end else begin
        x[N - QD * i +: QD] <= rd_data;
        xprev <= rd_data;
        if (i == IW'(K)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          i <= i + 1'b1;
        end
      end
    end
  end
endmodule
