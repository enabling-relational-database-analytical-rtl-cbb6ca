// tb_pim_xb_tile: drives one tile (16x512 crossbar) with hand-built
// controller commands: word writes and reads (read data one cycle later), a
// column NOR, and a SUM aggregation over rows whose select bit is set,
// whose result is written back into the array through the write control
// and read again.
module tb_pim_xb_tile;
  import pim_pkg::*;
  localparam int ROWS = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  xb_ctl_t ctl; logic [RD_W-1:0] wdata, rdata; logic [AGG_W-1:0] agg_result;
  logic [RD_W-1:0] w0 [ROWS], w1 [ROWS];
  int checks = 0, failures = 0;

  pim_xb_tile #(.ROWS(ROWS)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic cyc(); @(posedge clk); #1; ctl = '0; endtask
  task automatic wr(int r, int w, logic [15:0] v);
    ctl = '0; ctl.cmd = XC_WRITE; ctl.row = row_t'(r); ctl.word = word_t'(w); wdata = v; cyc();
  endtask
  task automatic rd(int r, int w, output logic [15:0] v);
    ctl = '0; ctl.cmd = XC_READ; ctl.row = row_t'(r); ctl.word = word_t'(w); cyc(); v = rdata;
  endtask

  initial begin
    logic [15:0] v; logic [63:0] e;
    ctl = '0; wdata = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      w0[r] = 16'($urandom); w1[r] = 16'($urandom);
      wr(r, 0, w0[r]); wr(r, 1, w1[r]);
    end
    for (int r = 0; r < ROWS; r++) begin
      rd(r, 0, v); chk(v == w0[r], "read word 0");
      rd(r, 1, v); chk(v == w1[r], "read word 1");
    end
    // column 20 <- NOR(column 3, column 17) in all rows
    ctl = '0; ctl.cmd = XC_COLOP; ctl.fn = FN_NOR; ctl.a = 3; ctl.b = 17; ctl.dst = 20; cyc();
    for (int r = 0; r < ROWS; r++) begin
      rd(r, 1, v); chk(v[4] == ~(w0[r][3] | w1[r][1]), "column NOR");
      w1[r][4] = v[4];
    end
    // SUM of word 0 (16-bit attribute at column 0) where column 31 (word 1 bit 15) is set
    e = 0;
    ctl = '0; ctl.agg_ctl = AC_CLEAR; ctl.agg_fn = AGG_SUM; cyc();
    for (int r = 0; r < ROWS; r++) begin
      ctl = '0; ctl.cmd = XC_READ; ctl.row = row_t'(r); ctl.word = 1; ctl.agg_ctl = AC_SEL;
      ctl.agg_fn = AGG_SUM; ctl.sel_bit = 15; cyc();
      ctl = '0; ctl.cmd = XC_READ; ctl.row = row_t'(r); ctl.word = 0; ctl.agg_ctl = AC_LAST;
      ctl.agg_fn = AGG_SUM; ctl.width = 16; cyc();
      if (w1[r][15]) e += 64'(w0[r]);
    end
    cyc();
    chk(agg_result == e, $sformatf("aggregate %h vs %h", agg_result, e));
    for (int k = 0; k < 4; k++) begin
      ctl = '0; ctl.cmd = XC_WRITE; ctl.row = 2; ctl.word = word_t'(8 + k); ctl.wr_agg = 1;
      ctl.res_idx = 2'(k); wdata = 16'hdead; cyc();
    end
    for (int k = 0; k < 4; k++) begin
      rd(2, 8 + k, v); chk(v == e[k*16 +: 16], "result written back");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
