// tb_qg_parastrophe_ram -- fills all 8 x 32 x 32 parastrophe entries with
// random values over the key port (with interleaved writes to other key
// targets that must not land), then reads every entry back through the
// asynchronous read port and compares it with the copy kept here.
module tb_qg_parastrophe_ram;
  import mqq_pkg::*;
  logic clk = 0;
  key_wr_t key_wr;
  logic [2:0] rd_q;
  logic [4:0] rd_a, rd_b, rd_data;
  logic [4:0] ref_mem [8192];
  int checks = 0, failures = 0;
  qg_parastrophe_ram dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    key_wr = '0; rd_q = 0; rd_a = 0; rd_b = 0;
    for (int a = 0; a < 8192; a++) begin
      ref_mem[a] = 5'($urandom);
      @(negedge clk);
      key_wr.we = 1; key_wr.sel = KSEL_QG; key_wr.addr = a; key_wr.data = 32'(ref_mem[a]);
      @(negedge clk);
      key_wr.sel = KSEL_IDX; key_wr.data = ~key_wr.data;
    end
    @(negedge clk); key_wr = '0;
    for (int a = 0; a < 8192; a++) begin
      {rd_q, rd_a, rd_b} = 13'(a);
      #1;
      checks++;
      if (rd_data != ref_mem[a]) begin
        failures++;
        if (failures < 10) $display("entry %0d: %h != %h", a, rd_data, ref_mem[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
