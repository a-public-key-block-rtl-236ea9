// tb_mqq_workloads -- runs the coprocessor end to end at the three other
// block sizes for which the scheme is specified, n = 140, 180 and 200 bits
// (k = 28, 36 and 40 quasigroup elements), each in its own instance of
// mqq_e2e_bench running in parallel.  The default size, n = 160, is covered
// by tb_mqq_top.  Passes when all three finish without failures.
module tb_mqq_workloads;
  logic fin [3];
  int   chk [3], fl [3];
  int   checks, failures;

  mqq_e2e_bench #(.N(140)) u_140 (.finished(fin[0]), .checks(chk[0]), .failures(fl[0]));
  mqq_e2e_bench #(.N(180)) u_180 (.finished(fin[1]), .checks(chk[1]), .failures(fl[1]));
  mqq_e2e_bench #(.N(200)) u_200 (.finished(fin[2]), .checks(chk[2]), .failures(fl[2]));

  initial begin
    // watchdog, in 10-unit clock periods of the benches
    #(600000 * 10);
    checks = chk[0] + chk[1] + chk[2];
    failures = fl[0] + fl[1] + fl[2] + 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1;
    wait (fin[0] && fin[1] && fin[2]);
    checks = chk[0] + chk[1] + chk[2];
    failures = fl[0] + fl[1] + fl[2];
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
