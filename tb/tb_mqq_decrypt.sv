// tb_mqq_decrypt -- checks the private-key datapath at N = 45 (k = 9, the
// smallest block that holds all thirteen Dobbertin coordinates).  Random
// T^-1, S^-1 and parastrophe tables are loaded; each block's result is
// compared with the decryption algorithm evaluated here step by step (matrix
// products, Dob^-1 from a table inverted here with the reference Dob, the
// parastrophe chain).  Also checked: 'busy' during the 8192-cycle table fill,
// the k+4 cycle latency, back-to-back blocks, and a reprogrammed index
// sequence.
module tb_mqq_decrypt;
  import mqq_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned N = 45, K = N / 5, WPR = (N + 31) / 32;
  logic clk = 0, rst_n = 0, start, busy, done;
  key_wr_t key_wr;
  logic [N-1:0] y, x;
  bit tm [N][N], sm [N][N];
  logic [4:0] tbl [8192];
  logic [12:0] dinv [8192];
  int seq [2:K];
  int checks = 0, failures = 0;

  mqq_decrypt #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N-1:0] mul(input bit mm [N][N], input logic [N-1:0] v);
    logic [N-1:0] r;
    for (int a = 0; a < N; a++) begin
      bit s = 0;
      for (int c = 0; c < N; c++) s ^= mm[a][c] & v[N-1-c];
      r[N-1-a] = s;
    end
    return r;
  endfunction

  // coordinate c (1-based) <-> bit N-c
  function automatic logic [N-1:0] model(input logic [N-1:0] yy);
    logic [N-1:0] yp, xp;
    logic [12:0] w, z;
    int pos [13];
    logic [4:0] prev;
    yp = mul(tm, yy);
    for (int t = 0; t < 13; t++) pos[t] = (t < 5) ? t + 1 : 5 * (t - 4) + 1;
    for (int t = 0; t < 13; t++) w[12-t] = yp[N-pos[t]];
    z = dinv[w];
    for (int t = 0; t < 13; t++) yp[N-pos[t]] = z[12-t];
    xp = yp;
    prev = yp[N-1 -: 5];
    for (int i = 2; i <= K; i++) begin
      prev = tbl[{3'(seq[i]-1), prev, yp[N-5*i +: 5]}];
      xp[N-5*i +: 5] = prev;
    end
    return mul(sm, xp);
  endfunction

  task automatic write_key(input key_sel_e s, input int addr, input logic [31:0] d);
    @(negedge clk);
    key_wr.we = 1; key_wr.sel = s; key_wr.addr = addr; key_wr.data = d;
    @(negedge clk); key_wr = '0;
  endtask

  task automatic load_matrix(input key_sel_e s, input bit mm [N][N]);
    for (int r = 0; r < N; r++) begin
      logic [WPR*32-1:0] row = '0;
      for (int c = 0; c < N; c++) row[N-1-c] = mm[r][c];
      for (int wd = 0; wd < WPR; wd++) write_key(s, r * WPR + wd, row[wd*32 +: 32]);
    end
  endtask

  task automatic run_blocks(input int nb);
    logic [N-1:0] exp_x;
    int cyc;
    for (int b = 0; b < nb; b++) begin
      @(negedge clk);
      y = {$urandom, $urandom};
      exp_x = model(y);
      checks++;
      if (busy) begin failures++; $display("busy when idle"); end
      start = 1;
      @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks += 2;
      if (cyc != K + 4) begin failures++; $display("latency %0d", cyc); end
      if (x != exp_x) begin failures++; $display("x mismatch %h %h", x, exp_x); end
    end
  endtask

  initial begin
    key_wr = '0; start = 0; y = '0;
    for (int a = 0; a < 8192; a++) dinv[ref_dob(13'(a))] = 13'(a);
    for (int a = 0; a < 8192; a++) tbl[a] = 5'($urandom);
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) begin
      tm[r][c] = bit'($urandom); sm[r][c] = bit'($urandom);
    end
    seq[2] = 1; seq[3] = 2;
    for (int i = 4; i <= K; i++) seq[i] = 3 + ((i + 2) % 6);
    repeat (2) @(negedge clk);
    rst_n = 1;
    // a start during the table fill must be ignored
    repeat (100) @(negedge clk);
    checks++;
    if (!busy) begin failures++; $display("not busy during fill"); end
    start = 1; y = '1;
    @(negedge clk); start = 0;
    repeat (K + 10) begin
      @(negedge clk);
      checks++;
      if (done) begin failures++; $display("start accepted during fill"); end
    end
    // keys are loaded while the Dobbertin table fills
    load_matrix(KSEL_TINV, tm);
    load_matrix(KSEL_SINV, sm);
    for (int a = 0; a < 8192; a++) begin
      @(negedge clk);
      key_wr.we = 1; key_wr.sel = KSEL_QG; key_wr.addr = a; key_wr.data = 32'(tbl[a]);
    end
    @(negedge clk); key_wr = '0;
    while (busy) @(negedge clk);
    run_blocks(10);
    for (int i = 2; i <= K; i++) begin
      seq[i] = $urandom_range(1, 8);
      write_key(KSEL_IDX, i - 1, 32'(seq[i] - 1));
    end
    run_blocks(10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
