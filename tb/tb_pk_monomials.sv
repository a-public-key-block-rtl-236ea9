// tb_pk_monomials -- checks the monomial expander at N = 20: for random and
// corner inputs every output bit is compared with the monomial expected at
// that position, the position being computed here in closed form:
// pos(i,j) = 1 + (i-1)N - (i-1)(i-2)/2 + (j-i); padding bits must be zero.
module tb_pk_monomials;
  import mqq_pkg::*;
  localparam int unsigned N = 20;
  localparam int unsigned NM = 1 + N * (N + 1) / 2;
  localparam int unsigned MW = ((NM + 31) / 32) * 32;
  logic [N-1:0] x;
  logic [MW-1:0] m;
  int checks = 0, failures = 0;
  pk_monomials #(.N(N)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      logic [MW-1:0] e;
      x = (t == 0) ? '0 : (t == 1) ? '1 : N'({$urandom});
      #1;
      e = '0;
      e[0] = 1'b1;
      for (int i = 1; i <= N; i++)
        for (int j = i; j <= N; j++)
          e[1 + (i-1)*N - (i-1)*(i-2)/2 + (j-i)] = x[N-i] & x[N-j];
      checks++;
      if (m != e) begin failures++; $display("x=%h mismatch", x); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
