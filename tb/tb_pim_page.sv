// tb_pim_page: one page slice (controller + 4 crossbars of 64 rows) driven
// through its request port: records are stored, a filter is computed with
// column operations, the selected records are updated with the MUX
// algorithm, and MAX / SUM aggregations over a 20-bit attribute at an
// unaligned column are written back and read by host loads. Expected
// values come from a reference copy kept by the testbench.
module tb_pim_page;
  import pim_pkg::*;
  localparam int ROWS = 64, XBS = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid, req_ready, rvalid, busy;
  host_cmd_e req_cmd; row_t req_row; word_t req_word;
  logic [XBS*RD_W-1:0] req_wdata, rdata; pim_req_t req_pim;
  logic [XBS*AGG_W-1:0] agg_result;
  logic [19:0] val [XBS][ROWS]; logic [3:0] tag [XBS][ROWS];
  int checks = 0, failures = 0;

  pim_page #(.ROWS(ROWS), .XBS(XBS)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  task automatic send(host_cmd_e c);
    req_cmd = c; req_valid = 1; @(posedge clk);
    while (!req_ready) @(posedge clk);
    #1 req_valid = 0;
  endtask
  task automatic load(int r, int w, output logic [XBS*RD_W-1:0] d);
    req_row = row_t'(r); req_word = word_t'(w); send(HC_READ);
    while (!rvalid) @(posedge clk);
    #0 d = rdata; @(posedge clk); #1;
  endtask
  task automatic idle(); while (busy) @(posedge clk); #1; endtask

  function automatic logic s_of(int x, int r); return tag[x][r][0] & ~tag[x][r][1]; endfunction

  initial begin
    logic [XBS*RD_W-1:0] d1, d2, d3;
    logic [63:0] e;
    req_valid = 0; req_cmd = HC_READ; req_row = 0; req_word = 0; req_wdata = 0; req_pim = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // attribute val at columns 20..39 (word 1 bit 4 .. word 2 bit 7), tag at 64..67, sel at 80
    for (int r = 0; r < ROWS; r++) begin
      for (int x = 0; x < XBS; x++) begin
        val[x][r] = 20'($urandom); tag[x][r] = 4'($urandom);
        d1[x*16 +: 16] = {val[x][r][11:0], 4'h0};
        d2[x*16 +: 16] = {8'h00, val[x][r][19:12]};
        d3[x*16 +: 16] = {12'h0, tag[x][r]};
      end
      req_row = row_t'(r);
      req_word = 1; req_wdata = d1; send(HC_WRITE);
      req_word = 2; req_wdata = d2; send(HC_WRITE);
      req_word = 4; req_wdata = d3; send(HC_WRITE);
      req_word = 5; req_wdata = '0; send(HC_WRITE);
    end
    // sel (col 80) = tag0 & ~tag1
    req_pim = '0; req_pim.op = PR_COL_LOGIC; req_pim.fn = FN_ANDN;
    req_pim.src_a = 64; req_pim.src_b = 65; req_pim.dst = 80; send(HC_PIM);
    // MAX of val where selected -> row 1, words 10..13
    req_pim = '0; req_pim.op = PR_AGG; req_pim.agg_fn = AGG_MAX; req_pim.dst = 20;
    req_pim.width = 20; req_pim.sel_col = 80; req_pim.res_row = 1; req_pim.res_word = 10;
    send(HC_PIM); idle();
    for (int k = 0; k < 4; k++) begin
      load(1, 10 + k, d1);
      for (int x = 0; x < XBS; x++) begin
        e = 0;
        for (int r = 0; r < ROWS; r++) if (s_of(x, r) && 64'(val[x][r]) > e) e = 64'(val[x][r]);
        chk(d1[x*16 +: 16] == e[k*16 +: 16], $sformatf("MAX xb %0d word %0d", x, k));
      end
    end
    // UPDATE val <- 20'h12345 where selected
    req_pim = '0; req_pim.op = PR_MUX_IMM; req_pim.dst = 20; req_pim.width = 20;
    req_pim.sel_col = 80; req_pim.imm = 64'h12345; send(HC_PIM); idle();
    for (int r = 0; r < ROWS; r++) for (int x = 0; x < XBS; x++) if (s_of(x, r)) val[x][r] = 20'h12345;
    // SUM of val over selected records (now all 0x12345) -> row 2, words 16..19
    req_pim = '0; req_pim.op = PR_AGG; req_pim.agg_fn = AGG_SUM; req_pim.dst = 20;
    req_pim.width = 20; req_pim.sel_col = 80; req_pim.res_row = 2; req_pim.res_word = 16;
    send(HC_PIM); idle();
    for (int k = 0; k < 4; k++) begin
      load(2, 16 + k, d1);
      for (int x = 0; x < XBS; x++) begin
        e = 0;
        for (int r = 0; r < ROWS; r++) if (s_of(x, r)) e += 64'(val[x][r]);
        chk(d1[x*16 +: 16] == e[k*16 +: 16], $sformatf("SUM xb %0d word %0d", x, k));
      end
    end
    // unselected values kept (row 1 and 2 hold results, skip them)
    for (int r = 3; r < ROWS; r++) begin
      load(r, 1, d1); load(r, 2, d2);
      for (int x = 0; x < XBS; x++)
        chk({d2[x*16 +: 8], d1[x*16+4 +: 12]} == val[x][r], $sformatf("value row %0d xb %0d", r, x));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
