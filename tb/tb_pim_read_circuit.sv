// tb_pim_read_circuit: checks that the read circuit returns word `word` of
// the presented row one cycle later, and holds its output while idle.
module tb_pim_read_circuit;
  import pim_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  always #5 clk = ~clk;
  logic [XB_COLS-1:0] row_q; logic [WORD_AW-1:0] word; logic [RD_W-1:0] q, exp_q;
  int checks = 0, failures = 0;

  pim_read_circuit dut (.*);

  initial begin
    row_q = '0; word = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      for (int j = 0; j < XB_COLS/32; j++) row_q[j*32 +: 32] = $urandom;
      word = WORD_AW'($urandom); en = ($urandom_range(0, 3) != 0);
      if (en) exp_q = row_q[int'(word)*16 +: 16];
      @(posedge clk); #1;
      checks++;
      if (q !== exp_q) begin failures++; $display("FAIL i=%0d q=%h exp=%h", i, q, exp_q); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
