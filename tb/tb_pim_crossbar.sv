// tb_pim_crossbar: self-checking test of the crossbar model at full size
// (1024x512). A reference copy of the array is kept in the testbench; random
// word writes, column operations (NOR, OR, AND-NOT over all rows) and row
// operations are applied to both, and every row is compared afterwards.
module tb_pim_crossbar;
  import pim_pkg::*;
  localparam int ROWS = XB_ROWS, COLS = XB_COLS;
  logic clk = 0;
  always #5 clk = ~clk;
  xb_cmd_e cmd; logic_fn_e fn; row_t a, b, dst, row; word_t word;
  logic [RD_W-1:0] wdata; logic [COLS-1:0] row_q;
  logic [COLS-1:0] ref_m [ROWS];
  int checks = 0, failures = 0;

  pim_crossbar dut (.*);

  function automatic logic fb(logic_fn_e f, logic x, logic y);
    case (f) FN_NOR: return ~(x|y); FN_OR: return x|y; default: return x & ~y; endcase
  endfunction

  task automatic step(); @(posedge clk); #1; cmd = XC_NOP; endtask

  task automatic compare_all(string what);
    for (int r = 0; r < ROWS; r++) begin
      row = row_t'(r); #0.1;
      checks++;
      if (row_q !== ref_m[r]) begin
        failures++;
        if (failures < 5) $display("FAIL %s row %0d", what, r);
      end
    end
  endtask

  initial begin
    cmd = XC_NOP; fn = FN_NOR; a = 0; b = 0; dst = 0; row = 0; word = 0; wdata = 0;
    // fill every word of every row
    for (int r = 0; r < ROWS; r++)
      for (int w = 0; w < COLS/RD_W; w++) begin
        cmd = XC_WRITE; row = row_t'(r); word = word_t'(w); wdata = RD_W'($urandom);
        ref_m[r][w*RD_W +: RD_W] = wdata;
        step();
      end
    compare_all("write");
    // column operations
    for (int i = 0; i < 40; i++) begin
      cmd = XC_COLOP; fn = logic_fn_e'($urandom_range(0, 2));
      a = row_t'($urandom_range(0, COLS-1)); b = row_t'($urandom_range(0, COLS-1));
      dst = row_t'($urandom_range(0, COLS-1));
      for (int r = 0; r < ROWS; r++) ref_m[r][dst[8:0]] = fb(fn, ref_m[r][a[8:0]], ref_m[r][b[8:0]]);
      step();
    end
    compare_all("colop");
    // row operations
    for (int i = 0; i < 40; i++) begin
      cmd = XC_ROWOP; fn = logic_fn_e'($urandom_range(0, 2));
      a = row_t'($urandom_range(0, ROWS-1)); b = row_t'($urandom_range(0, ROWS-1));
      dst = row_t'($urandom_range(0, ROWS-1));
      for (int c = 0; c < COLS; c++) ref_m[dst][c] = fb(fn, ref_m[a][c], ref_m[b][c]);
      step();
    end
    compare_all("rowop");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
