// tb_pim_controller: checks the command sequences a PIM controller emits and
// their cycle counts: one command per host read/write/logic request, the
// per-bit OR / AND-NOT sequence of the MUX algorithm, the read timing, and
// the aggregation schedule (select read + attribute reads per row, drain,
// four result writes), whose busy time must be 1 + ROWS*(1+nrd) + 1 + 4.
module tb_pim_controller;
  import pim_pkg::*;
  localparam int ROWS = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid, req_ready, rvalid, busy;
  host_cmd_e req_cmd; row_t req_row; word_t req_word;
  logic [4*RD_W-1:0] req_wdata, wdata; pim_req_t req_pim; xb_ctl_t ctl;
  int checks = 0, failures = 0;

  pim_controller #(.ROWS(ROWS)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic issue(host_cmd_e c);
    req_cmd = c; req_valid = 1;
    @(posedge clk); #1; req_valid = 0;
  endtask

  initial begin
    int n_busy, n_sel, n_last, n_shift, n_wr;
    req_valid = 0; req_cmd = HC_READ; req_row = 0; req_word = 0; req_wdata = 0; req_pim = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // host read
    req_row = 10'd5; req_word = 5'd7; issue(HC_READ);
    chk(ctl.cmd == XC_READ && ctl.row == 5 && ctl.word == 7, "read cmd");
    chk(!rvalid, "rvalid not early");
    @(posedge clk); #1; chk(rvalid, "rvalid two cycles after accept");
    // host write
    req_wdata = 64'h1234_5678_9abc_def0; issue(HC_WRITE);
    chk(ctl.cmd == XC_WRITE && wdata == 64'h1234_5678_9abc_def0 && !ctl.wr_agg, "write cmd");
    // column logic
    req_pim = '0; req_pim.op = PR_COL_LOGIC; req_pim.fn = FN_NOR;
    req_pim.src_a = 3; req_pim.src_b = 4; req_pim.dst = 9; issue(HC_PIM);
    chk(ctl.cmd == XC_COLOP && ctl.fn == FN_NOR && ctl.a == 3 && ctl.b == 4 && ctl.dst == 9, "col op");
    chk(req_ready, "ready after 1-cycle op");
    // MUX with immediate: width 6, imm 101101b
    req_pim = '0; req_pim.op = PR_MUX_IMM; req_pim.dst = 100; req_pim.sel_col = 9'd300;
    req_pim.width = 6; req_pim.imm = 64'b101101; issue(HC_PIM);
    for (int i = 0; i < 6; i++) begin
      chk(ctl.cmd == XC_COLOP && ctl.a == 10'(100+i) && ctl.dst == 10'(100+i) && ctl.b == 300 &&
          ctl.fn == ((6'b101101 >> i) & 1 ? FN_OR : FN_ANDN), $sformatf("mux bit %0d", i));
      if (i < 5) chk(!req_ready, "stall during mux");
      @(posedge clk); #1;
    end
    chk(ctl.cmd == XC_NOP, "mux done after width cycles");
    // aggregation: attribute at column 40 (offset 8), width 20 -> 2 reads
    req_pim = '0; req_pim.op = PR_AGG; req_pim.agg_fn = AGG_MAX; req_pim.dst = 40;
    req_pim.width = 20; req_pim.sel_col = 9'd35; req_pim.res_row = 3; req_pim.res_word = 10;
    req_cmd = HC_PIM; req_valid = 1;
    n_busy = 0; n_sel = 0; n_last = 0; n_shift = 0; n_wr = 0;
    @(posedge clk); #1; req_valid = 0;
    chk(ctl.agg_ctl == AC_CLEAR && ctl.agg_fn == AGG_MAX, "agg clear");
    while (busy) begin
      n_busy++;
      @(posedge clk); #1;
      if (ctl.agg_ctl == AC_SEL) begin n_sel++; chk(ctl.word == 2 && ctl.sel_bit == 3 && ctl.cmd == XC_READ, "sel read"); end
      if (ctl.agg_ctl == AC_SHIFT) begin n_shift++; chk(ctl.word == 2 && ctl.rd_idx == 0 && ctl.offset == 8, "shift read"); end
      if (ctl.agg_ctl == AC_LAST) begin n_last++; chk(ctl.word == 3 && ctl.rd_idx == 1 && ctl.width == 20, "last read"); end
      if (ctl.cmd == XC_WRITE) begin
        chk(ctl.wr_agg && ctl.row == 3 && ctl.word == 5'(10 + n_wr) && ctl.res_idx == 2'(n_wr), "result write");
        n_wr++;
      end
    end
    chk(n_sel == ROWS && n_shift == ROWS && n_last == ROWS, "one select + two reads per row");
    chk(n_wr == 4, "four result writes");
    chk(n_busy == ROWS*3 + 1 + 4, $sformatf("agg busy cycles %0d", n_busy));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
