// tb_gf2_matvec -- checks the GF(2) matrix-vector unit at N = 160: loads a
// random matrix over the key port, streams random vectors back to back and
// compares every product, bit by bit, with a reference computed here, and
// checks the one-cycle latency.
module tb_gf2_matvec;
  import mqq_pkg::*;
  localparam int unsigned N = 160;
  localparam int unsigned WPR = (N + 31) / 32;
  logic clk = 0, rst_n = 0;
  key_wr_t key_wr;
  logic in_valid, out_valid;
  logic [N-1:0] vec_in, vec_out;
  int checks = 0, failures = 0;
  bit m [N][N];                       // m[r][c], 0-based
  logic [N-1:0] exp_q [$];

  gf2_matvec #(.N(N), .SEL(KSEL_SINV)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [N-1:0] ref_prod(input logic [N-1:0] v);
    logic [N-1:0] r;
    for (int a = 0; a < N; a++) begin
      bit s = 0;
      for (int c = 0; c < N; c++) s ^= m[a][c] & v[N-1-c];
      r[N-1-a] = s;
    end
    return r;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    key_wr = '0; in_valid = 0; vec_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) m[r][c] = bit'($urandom_range(0, 1));
    // a write to another key target must be ignored
    for (int r = 0; r < N; r++)
      for (int w = 0; w < WPR; w++) begin
        logic [WPR*32-1:0] row = '0;
        for (int c = 0; c < N; c++) row[N-1-c] = m[r][c];
        @(negedge clk);
        key_wr.we = 1; key_wr.sel = KSEL_SINV; key_wr.addr = r * WPR + w;
        key_wr.data = row[w*32 +: 32];
        @(negedge clk);
        key_wr.sel = KSEL_TINV; key_wr.data = ~key_wr.data;
      end
    @(negedge clk); key_wr = '0;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      in_valid = 1;
      vec_in = {$urandom, $urandom, $urandom, $urandom, $urandom};
      if (t == 5) vec_in = '0;
      exp_q.push_back(ref_prod(vec_in));
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("missing outputs %0d", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // outputs must come exactly one cycle after each input
  logic in_valid_d;
  always @(posedge clk) begin
    in_valid_d <= in_valid;
    if (rst_n) begin
      if (out_valid != in_valid_d) begin
        checks++; failures++; $display("latency mismatch");
      end
      if (out_valid) begin
        checks++;
        if (exp_q.size() == 0 || vec_out != exp_q[0]) begin
          failures++; $display("product mismatch %h", vec_out);
        end
        if (exp_q.size() != 0) void'(exp_q.pop_front());
      end
    end
  end
endmodule
