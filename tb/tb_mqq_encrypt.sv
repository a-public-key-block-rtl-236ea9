// tb_mqq_encrypt -- checks the public-key evaluator at N = 20: loads random
// coefficient rows over the key port, streams blocks one per cycle and
// compares each output with y_r = c_r + sum_{i<=j} c_r(i,j) x_i x_j evaluated
// here term by term; checks the two-cycle latency and full throughput.
module tb_mqq_encrypt;
  import mqq_pkg::*;
  localparam int unsigned N = 20;
  localparam int unsigned NM = 1 + N * (N + 1) / 2;
  localparam int unsigned MW = ((NM + 31) / 32) * 32;
  localparam int unsigned WPR = MW / 32;
  logic clk = 0, rst_n = 0, in_valid, out_valid;
  key_wr_t key_wr;
  logic [N-1:0] x, y;
  logic [MW-1:0] coef [N];
  logic [N-1:0] exp_q [$];
  int checks = 0, failures = 0, outs = 0;
  logic v_d1, v_d2;

  mqq_encrypt #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N-1:0] model(input logic [N-1:0] xx);
    logic [N-1:0] r;
    for (int p = 0; p < N; p++) begin
      bit s;
      int t;
      s = coef[p][0];
      t = 1;
      for (int i = 1; i <= N; i++)
        for (int j = i; j <= N; j++) begin
          s ^= coef[p][t] & xx[N-i] & xx[N-j];
          t++;
        end
      r[N-1-p] = s;
    end
    return r;
  endfunction

  initial begin
    key_wr = '0; in_valid = 0; x = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < N; p++) begin
      coef[p] = '0;
      for (int b = 0; b < NM; b++) coef[p][b] = 1'($urandom);
      for (int w = 0; w < WPR; w++) begin
        @(negedge clk);
        key_wr.we = 1; key_wr.sel = KSEL_PK; key_wr.addr = p * WPR + w; key_wr.data = coef[p][w*32 +: 32];
      end
    end
    @(negedge clk); key_wr = '0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      in_valid = (t % 37 != 5);
      x = (t == 0) ? '0 : N'($urandom);
      if (in_valid) exp_q.push_back(model(x));
    end
    @(negedge clk); in_valid = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || outs < 290) begin failures++; $display("lost outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    v_d1 <= in_valid; v_d2 <= v_d1;
    if (rst_n) begin
      if (out_valid != v_d2) begin checks++; failures++; $display("latency error"); end
      if (out_valid) begin
        outs++; checks++;
        if (exp_q.size() == 0 || y != exp_q[0]) begin failures++; $display("y mismatch %h", y); end
        if (exp_q.size() != 0) void'(exp_q.pop_front());
      end
    end
  end
endmodule
