// mqq_e2e_bench -- end-to-end run of mqq_top at block size N, for testing
// the coprocessor at sizes other than its default.  It is the same procedure
// as tb_mqq_top: it generates a private key (S, T and their inverses, eight
// quadratic quasigroups of order 32 with their parastrophes, an index
// sequence using quasigroups 1 and 2 for Y_2..Y_9), derives the public key by
// interpolation of F = T o P' o S, loads everything over the key port, and
// checks encryption against F, decryption back to the plaintext, signing with
// verification on the encryptor, encryption running during decryption, and a
// request ignored during the Dobbertin table fill.  It reports its counts on
// its outputs and raises 'finished' instead of ending the simulation.
module mqq_e2e_bench
  import mqq_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int unsigned N = 140
) (
  output logic finished,
  output int   checks,
  output int   failures
);
  localparam int unsigned K = N / 5;
  localparam int unsigned NM = 1 + N * (N + 1) / 2;
  localparam int unsigned MW = ((NM + 31) / 32) * 32, WPR = MW / 32;
  localparam int unsigned MWPR = (N + 31) / 32;

  logic clk = 0, rst_n = 0;
  key_wr_t key_wr;
  logic enc_in_valid, enc_out_valid, dec_start, dec_busy, dec_done;
  logic [N-1:0] enc_x, enc_y, dec_y, dec_x;

  mqq_top #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  int n_enc = 0, n_dec = 0, n_sign = 0, n_fill_block = 0, n_overlap = 0, n_b2b = 0;

  // ---------------- private key ----------------
  logic [N-1:0] S [N], Si [N], T [N], Ti [N];   // row r, column c at bit N-1-c
  logic [4:0] qtab [8][32][32], ptab [8][32][32];
  int iseq [1:K-1];                              // I_j, quasigroup 1..8
  int term_u [8][2:5][3], term_v [8][2:5][3];
  logic [4:0] qconst [8];
  logic [MW-1:0] pk [N];

  function automatic logic [N-1:0] mv(input logic [N-1:0] m [N], input logic [N-1:0] v);
    logic [N-1:0] r;
    for (int a = 0; a < N; a++) r[N-1-a] = ^(m[a] & v);
    return r;
  endfunction

  task automatic gen_inv(output logic [N-1:0] a [N], output logic [N-1:0] ai [N]);
    for (int r = 0; r < N; r++) begin a[r] = '0; a[r][N-1-r] = 1'b1; ai[r] = a[r]; end
    for (int t = 0; t < 6 * N; t++) begin
      int r, s;
      r = $urandom_range(0, N - 1);
      s = $urandom_range(0, N - 2);
      if (s >= r) s++;
      a[r] ^= a[s];                                      // A <- E A
      for (int q = 0; q < N; q++) ai[q][N-1-s] ^= ai[q][N-1-r];  // A^-1 <- A^-1 E
    end
  endtask

  // quasigroup q (0-based) on 5-bit elements, coordinate 1 = MSB
  function automatic logic [4:0] qg(input int q, input logic [4:0] a, input logic [4:0] b);
    bit xv [1:5], yv [1:5], z [1:5], vars [10];
    logic [4:0] o;
    for (int c = 1; c <= 5; c++) begin xv[c] = a[5-c]; yv[c] = b[5-c]; end
    for (int r = 1; r <= 5; r++) begin
      z[r] = xv[r] ^ yv[r] ^ qconst[q][5-r];
      if (r >= 2) begin
        for (int c = 1; c < r; c++) begin vars[2*(c-1)] = xv[c]; vars[2*(c-1)+1] = yv[c]; end
        for (int t = 0; t < 3; t++) z[r] ^= vars[term_u[q][r][t]] & vars[term_v[q][r][t]];
      end
    end
    if (q < 2) o = {z[1], z[2], z[3], z[4], z[5]};
    else       o = {z[2], z[3], z[4], z[5], z[1]};
    return o;
  endfunction

  function automatic int pos13(input int t);   // y' coordinate of W_{t+1}
    return (t < 5) ? t + 1 : 5 * (t - 4) + 1;
  endfunction

  // the private map F = T o P' o S
  function automatic logic [N-1:0] fmap(input logic [N-1:0] x);
    logic [N-1:0] xs, yp;
    logic [12:0] zz, ww;
    xs = mv(S, x);
    yp = xs;
    for (int j = 1; j < K; j++)
      yp[N-5*(j+1) +: 5] = qtab[iseq[j]-1][xs[N-5*j +: 5]][xs[N-5*(j+1) +: 5]];
    for (int t = 0; t < 13; t++) zz[12-t] = yp[N-pos13(t)];
    ww = ref_dob(zz);
    for (int t = 0; t < 13; t++) yp[N-pos13(t)] = ww[12-t];
    return mv(T, yp);
  endfunction

  task automatic keygen;
    logic [N-1:0] f0, fi [N], fij, e;
    gen_inv(S, Si);
    gen_inv(T, Ti);
    for (int q = 0; q < 8; q++) begin
      qconst[q] = 5'($urandom);
      for (int r = 2; r <= 5; r++)
        for (int t = 0; t < 3; t++) begin
          term_u[q][r][t] = $urandom_range(0, 2 * (r - 1) - 1);
          term_v[q][r][t] = $urandom_range(0, 2 * (r - 1) - 1);
        end
      term_u[q][2][0] = 0; term_v[q][2][0] = 1;          // x_1 y_1: coordinate 2 quadratic
      for (int a = 0; a < 32; a++)
        for (int b = 0; b < 32; b++) qtab[q][a][b] = qg(q, 5'(a), 5'(b));
      for (int a = 0; a < 32; a++)
        for (int b = 0; b < 32; b++) ptab[q][a][qtab[q][a][b]] = 5'(b);
    end
    for (int j = 1; j < K; j++) iseq[j] = (j <= 8) ? 1 + (j % 2) : $urandom_range(3, 8);
    // public key by interpolation
    f0 = fmap('0);
    for (int i = 0; i < N; i++) begin e = '0; e[N-1-i] = 1'b1; fi[i] = fmap(e); end
    for (int p = 0; p < N; p++) pk[p] = '0;
    for (int p = 0; p < N; p++) pk[p][0] = f0[N-1-p];
    for (int i = 1; i <= N; i++)
      for (int j = i; j <= N; j++) begin
        int t;
        t = 1 + (i-1)*N - (i-1)*(i-2)/2 + (j-i);
        if (i == j) fij = fi[i-1] ^ f0;
        else begin
          e = '0; e[N-i] = 1'b1; e[N-j] = 1'b1;
          fij = fmap(e) ^ fi[i-1] ^ fi[j-1] ^ f0;
        end
        for (int p = 0; p < N; p++) pk[p][t] = fij[N-1-p];
      end
  endtask

  task automatic kw(input key_sel_e s, input int addr, input logic [31:0] d);
    @(negedge clk);
    key_wr.we = 1; key_wr.sel = s; key_wr.addr = addr; key_wr.data = d;
  endtask

  task automatic load_keys;
    for (int r = 0; r < N; r++)
      for (int w = 0; w < MWPR; w++) begin
        logic [MWPR*32-1:0] rt, rs;
        rt = '0; rs = '0; rt[N-1:0] = Ti[r]; rs[N-1:0] = Si[r];
        kw(KSEL_TINV, r * MWPR + w, rt[w*32 +: 32]);
        kw(KSEL_SINV, r * MWPR + w, rs[w*32 +: 32]);
      end
    for (int q = 0; q < 8; q++)
      for (int a = 0; a < 32; a++)
        for (int b = 0; b < 32; b++) kw(KSEL_QG, {q[2:0], a[4:0], b[4:0]}, 32'(ptab[q][a][b]));
    for (int j = 1; j < K; j++) kw(KSEL_IDX, j, 32'(iseq[j] - 1));
    for (int p = 0; p < N; p++)
      for (int w = 0; w < WPR; w++) kw(KSEL_PK, p * WPR + w, pk[p][w*32 +: 32]);
    @(negedge clk); key_wr = '0;
  endtask

  function automatic logic [N-1:0] rnd();
    logic [N-1:0] r;
    for (int i = 0; i < N; i++) r[i] = 1'($urandom);
    return r;
  endfunction

  // ---------------- encryption scoreboard ----------------
  logic [N-1:0] enc_exp [$];
  always @(posedge clk) if (rst_n && enc_out_valid) begin
    checks++; n_enc++;
    if (enc_exp.size() == 0 || enc_y != enc_exp[0]) begin
      failures++; $display("encryption mismatch %h", enc_y);
    end
    if (enc_exp.size() != 0) void'(enc_exp.pop_front());
    if (dec_busy && int'(dut.u_dec.state) != 0) n_overlap++;
  end

  task automatic encrypt_stream(input logic [N-1:0] xs [$]);
    foreach (xs[t]) begin
      @(negedge clk);
      enc_in_valid = 1; enc_x = xs[t];
      enc_exp.push_back(fmap(xs[t]));
      if (t > 0) n_b2b++;
    end
    @(negedge clk); enc_in_valid = 0;
  endtask

  task automatic decrypt(input logic [N-1:0] yy, output logic [N-1:0] xx);
    @(negedge clk);
    while (dec_busy) @(negedge clk);
    dec_start = 1; dec_y = yy;
    @(negedge clk); dec_start = 0;
    while (!dec_done) @(negedge clk);
    xx = dec_x;
  endtask

  initial begin
    logic [N-1:0] xs [$], cts [$], xx;
    int fillc;
    checks = 0; failures = 0; finished = 0;
    key_wr = '0; enc_in_valid = 0; enc_x = '0; dec_start = 0; dec_y = '0;
    keygen();
    repeat (2) @(negedge clk);
    rst_n = 1;
    // a decryption request while the Dobbertin table is still being built
    @(negedge clk); dec_start = 1; dec_y = rnd();
    @(negedge clk); dec_start = 0;
    checks++;
    if (!dec_busy) begin failures++; $display("not busy during fill"); end
    else n_fill_block++;
    load_keys();
    fillc = 0;
    while (dec_busy) begin @(negedge clk); fillc++; end
    checks++;
    if (int'(dut.u_dec.state) != 0) begin failures++; $display("start during fill was taken"); end
    // encryption, back to back
    for (int t = 0; t < 24; t++) xs.push_back(t == 0 ? '0 : rnd());
    encrypt_stream(xs);
    repeat (4) @(negedge clk);
    // decryption of what was encrypted (enc(x) = F(x))
    foreach (xs[t]) begin
      decrypt(fmap(xs[t]), xx);
      checks++; n_dec++;
      if (xx != xs[t]) begin failures++; $display("decryption mismatch block %0d", t); end
    end
    // signing: x = P^-1(y), then verify on the encryptor, with encryption
    // traffic running during the decryption
    for (int t = 0; t < 8; t++) begin
      logic [N-1:0] yy, more [$];
      yy = rnd();
      fork
        decrypt(yy, xx);
        begin
          repeat (3) @(negedge clk);
          more = {rnd(), rnd(), rnd()};
          encrypt_stream(more);
        end
      join
      checks++; n_sign++;
      if (fmap(xx) != yy) begin failures++; $display("signature does not verify (model)"); end
      enc_exp.push_back(yy);
      @(negedge clk); enc_in_valid = 1; enc_x = xx;
      @(negedge clk); enc_in_valid = 0;
      repeat (3) @(negedge clk);
    end
    repeat (4) @(negedge clk);
    checks++;
    if (enc_exp.size() != 0) begin failures++; $display("%0d encryptions missing", enc_exp.size()); end
    $display("N=%0d events: enc=%0d back_to_back=%0d dec=%0d sign=%0d fill_block=%0d overlap=%0d",
             N, n_enc, n_b2b, n_dec, n_sign, n_fill_block, n_overlap);
    if (n_enc == 0 || n_b2b == 0 || n_dec == 0 || n_sign == 0 || n_fill_block == 0 || n_overlap == 0) begin
      failures++; $display("a mechanism was never exercised");
    end
    finished = 1;
  end
endmodule
