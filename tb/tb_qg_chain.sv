// tb_qg_chain -- checks the parastrophe chain at N = 160 (k = 32).  A random
// table stands behind the lookup port (modelled here).  Blocks are run first
// with the index sequence present after reset (the decryption algorithm's
// \1, \2, \_{3+((i+2) mod 6)}) and then with a random sequence written over
// the key port.  Each result is compared with X_1 = Y_1,
// X_i = tbl[q(i)][X_{i-1}][Y_i] computed here, and 'done' must come exactly
// k cycles after the cycle of 'start'.
module tb_qg_chain;
  import mqq_pkg::*;
  localparam int unsigned N = 160, K = N / 5;
  logic clk = 0, rst_n = 0, start, busy, done;
  key_wr_t key_wr;
  logic [N-1:0] y, x;
  logic [2:0] rd_q;
  logic [4:0] rd_a, rd_b, rd_data;
  logic [4:0] tbl [8192];
  int seq [2:K];
  int checks = 0, failures = 0;

  qg_chain #(.N(N)) dut (.*);
  assign rd_data = tbl[{rd_q, rd_a, rd_b}];
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N-1:0] model(input logic [N-1:0] yy);
    logic [N-1:0] r;
    logic [4:0] xp;
    xp = yy[N-1 -: 5];
    r = yy;
    for (int i = 2; i <= K; i++) begin
      xp = tbl[{3'(seq[i] - 1), xp, yy[N-5*i +: 5]}];
      r[N-5*i +: 5] = xp;
    end
    return r;
  endfunction

  task automatic run_block;
    int cyc;
    logic [N-1:0] exp_x;
    @(negedge clk);
    y = {$urandom, $urandom, $urandom, $urandom, $urandom};
    exp_x = model(y);
    start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks += 2;
    if (cyc != K) begin failures++; $display("latency %0d", cyc); end
    if (x != exp_x) begin failures++; $display("x mismatch\n %h\n %h", x, exp_x); end
  endtask

  initial begin
    key_wr = '0; start = 0; y = '0;
    for (int a = 0; a < 8192; a++) tbl[a] = 5'($urandom);
    seq[2] = 1; seq[3] = 2;
    for (int i = 4; i <= K; i++) seq[i] = 3 + ((i + 2) % 6);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 20; b++) run_block();
    // program a new index sequence
    for (int i = 2; i <= K; i++) begin
      seq[i] = $urandom_range(1, 8);
      @(negedge clk);
      key_wr.we = 1; key_wr.sel = KSEL_IDX; key_wr.addr = i - 1; key_wr.data = 32'(seq[i] - 1);
      @(negedge clk);
      key_wr.sel = KSEL_QG; key_wr.data = 32'(3'(seq[i]));
    end
    @(negedge clk); key_wr = '0;
    for (int b = 0; b < 20; b++) run_block();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
