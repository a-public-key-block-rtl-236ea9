// mqq_decrypt -- MQQ private-key operation (decryption, or signing).
//
// For a ciphertext y it returns the x with P(x) = y, following the paper's
// decryption algorithm step by step:
//   1. y' = T^-1 y                                  (gf2_matvec, key T^-1)
//   2. W  = (y'_1..y'_5, y'_6, y'_11, .., y'_41)    13 bits: element Y_1 and
//          the first coordinates of Y_2 .. Y_9
//   3. Z  = Dob^-1(W)                               (dob_inv_rom)
//   4. those 13 coordinates of y' are replaced by Z
//   5-6. x' = X_1..X_k, X_1 = Y_1, X_i = X_{i-1} \_{q(i)} Y_i   (qg_chain)
//   7. x  = S^-1 x'                                 (gf2_matvec, key S^-1)
// One block is processed at a time.  The parastrophe chain is inherently
// serial (each X_i needs X_{i-1}), so a block takes k + 4 cycles
// (k = N/5; 36 cycles for N = 160, from the cycle of start to done).  The paper reports decryption at
// 399.04 Mbit/s and 249.4 MHz, i.e. one 160-bit block per 100 cycles, without
// describing its datapath; this implementation's schedule is its own.
//
// Interface: 'start' with 'y' is accepted when 'busy' is low; 'done' pulses
// with 'x' valid, and x holds until the next block.  busy is high while the
// Dobbertin table fills after reset (8192 cycles) and while a block is being
// processed.  Key material (T^-1, S^-1, parastrophes, index sequence) comes
// over key_wr; see the submodules for the address maps.
module mqq_decrypt
  import mqq_pkg::*;
#(
  parameter int unsigned N = 160
) (
  input  logic         clk,
  input  logic         rst_n,
  input  key_wr_t      key_wr,
  input  logic         start,
  input  logic [N-1:0] y,
  output logic         busy,
  output logic         done,
  output logic [N-1:0] x
);
  localparam int unsigned K = N / QD;

  if (N % QD != 0 || K < 9) begin : g_bad_n
    $error("mqq_decrypt: N must be a multiple of 5 and at least 45");
  end

  typedef enum logic [2:0] {S_IDLE, S_TINV, S_DOB, S_CHAIN, S_SINV} state_e;
  state_e state;

  // Coordinate c (1..N) of a block sits at bit N-c; W_t (1..13) at bit 13-t.
  function automatic int unsigned wpos(input int unsigned t);
    return (t <= QD) ? t : QD * (t - QD) + 1;   // y' coordinate feeding W_t
  endfunction

  logic          tinv_valid, sinv_valid, dob_ready, chain_start, chain_busy, chain_done;
  logic [N-1:0]  tinv_out, sinv_out, chain_x, yp, ypp;
  logic [DOBW-1:0] w_word, z_word;
  logic [2:0]    rd_q;
  logic [QD-1:0] rd_a, rd_b, rd_data;

  gf2_matvec #(.N(N), .SEL(KSEL_TINV)) u_tinv (
    .clk, .rst_n, .key_wr,
    .in_valid(start && !busy), .vec_in(y),
    .out_valid(tinv_valid), .vec_out(tinv_out));

  always_comb begin
    for (int unsigned t = 1; t <= DOBW; t++)
      w_word[DOBW - t] = tinv_out[N - wpos(t)];
  end

  dob_inv_rom u_dob (
    .clk, .rst_n, .ready(dob_ready),
    .rd_en(tinv_valid), .w(w_word), .z(z_word));

  always_comb begin
    ypp = yp;
    for (int unsigned t = 1; t <= DOBW; t++)
      ypp[N - wpos(t)] = z_word[DOBW - t];
  end

  qg_parastrophe_ram u_qg (
    .clk, .key_wr, .rd_q, .rd_a, .rd_b, .rd_data);

  assign chain_start = (state == S_DOB);

  qg_chain #(.N(N)) u_chain (
    .clk, .rst_n, .key_wr,
    .start(chain_start), .y(ypp),
    .busy(chain_busy), .done(chain_done), .x(chain_x),
    .rd_q, .rd_a, .rd_b, .rd_data);

  gf2_matvec #(.N(N), .SEL(KSEL_SINV)) u_sinv (
    .clk, .rst_n, .key_wr,
    .in_valid(chain_done), .vec_in(chain_x),
    .out_valid(sinv_valid), .vec_out(sinv_out));

  assign busy = !dob_ready || state != S_IDLE;
  assign x    = sinv_out;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      yp    <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE:  if (start && !busy) state <= S_TINV;
        S_TINV:  begin yp <= tinv_out; state <= S_DOB; end
        S_DOB:   state <= S_CHAIN;
        S_CHAIN: if (chain_done) state <= S_SINV;
        S_SINV:  if (sinv_valid) begin done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The chain must be idle whenever a new block reaches it.
  a_chain_free: assert property (@(posedge clk) disable iff (!rst_n)
                                 chain_start |-> !chain_busy);
endmodule
