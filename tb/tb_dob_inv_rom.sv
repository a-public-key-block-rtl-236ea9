// tb_dob_inv_rom -- checks the Dobbertin inverse table: after reset 'ready'
// must rise after the 8192-cycle fill, and every looked-up Z must satisfy
// Dob(Z) = W with Dob evaluated by the independent reference arithmetic of
// tb_ref_pkg.  All 8192 addresses are read, plus three values worked out by
// hand-independent means (Dob(1) = 1, Dob(0x0002) = 0x14D3,
// Dob(0x1234) = 0x1244 for the field polynomial x^13 + x^4 + x^3 + x + 1).
module tb_dob_inv_rom;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, ready, rd_en;
  logic [12:0] w, z;
  int checks = 0, failures = 0, fill_cycles = 0;
  dob_inv_rom dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic look(input logic [12:0] ww, output logic [12:0] zz);
    @(negedge clk); rd_en = 1; w = ww;
    @(negedge clk); rd_en = 0; zz = z;
  endtask

  initial begin
    logic [12:0] zz;
    rd_en = 0; w = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (!ready) begin @(posedge clk); fill_cycles++; end
    checks++;
    if (fill_cycles < 8192 || fill_cycles > 8194) begin
      failures++; $display("fill took %0d cycles", fill_cycles);
    end
    look(13'h0001, zz); checks++; if (zz != 13'h0001) begin failures++; $display("inv(1)=%h", zz); end
    look(13'h14D3, zz); checks++; if (zz != 13'h0002) begin failures++; $display("inv(14d3)=%h", zz); end
    look(13'h1244, zz); checks++; if (zz != 13'h1234) begin failures++; $display("inv(1244)=%h", zz); end
    for (int a = 0; a < 8192; a++) begin
      look(13'(a), zz);
      checks++;
      if (ref_dob(zz) != 13'(a)) begin
        failures++;
        if (failures < 10) $display("Dob(%h) != %h", zz, a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
