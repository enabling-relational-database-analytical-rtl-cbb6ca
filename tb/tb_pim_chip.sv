// tb_pim_chip: a chip with 4 page slices of 16-row crossbars. Checks that
// commands reach only the addressed page, that a page running an
// aggregation stalls its own requests while loads, stores and PIM requests
// to other pages proceed, and that read data come from the right page.
module tb_pim_chip;
  import pim_pkg::*;
  localparam int ROWS = 16, NP = 4, XBS = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid, req_ready, rvalid;
  host_cmd_e req_cmd; logic [1:0] req_page; row_t req_row; word_t req_word;
  logic [XBS*RD_W-1:0] req_wdata, rdata; pim_req_t req_pim; logic [NP-1:0] page_busy;
  int checks = 0, failures = 0;

  pim_chip #(.ROWS(ROWS), .NPAGES(NP)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic send(host_cmd_e c, int p, int r, int w);
    req_cmd = c; req_page = 2'(p); req_row = row_t'(r); req_word = word_t'(w); req_valid = 1;
    @(posedge clk); while (!req_ready) @(posedge clk); #1 req_valid = 0;
  endtask
  task automatic load(int p, int r, int w, output logic [63:0] d);
    send(HC_READ, p, r, w); while (!rvalid) @(posedge clk); #0 d = rdata; @(posedge clk); #1;
  endtask

  initial begin
    logic [63:0] d;
    req_valid = 0; req_cmd = HC_READ; req_page = 0; req_row = 0; req_word = 0;
    req_wdata = 0; req_pim = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // distinct contents per page: word 0 = page id pattern, word 1 bit 0 = 1
    for (int p = 0; p < NP; p++)
      for (int r = 0; r < ROWS; r++) begin
        req_wdata = {4{16'(p * 256 + r)}}; send(HC_WRITE, p, r, 0);
        req_wdata = {4{16'h0001}};         send(HC_WRITE, p, r, 1);
      end
    for (int p = 0; p < NP; p++) for (int r = 0; r < ROWS; r += 5) begin
      load(p, r, 0, d); chk(d == {4{16'(p * 256 + r)}}, $sformatf("page %0d row %0d", p, r));
    end
    // long aggregation on page 2: SUM of word 0 selected by column 16
    req_pim = '0; req_pim.op = PR_AGG; req_pim.agg_fn = AGG_SUM; req_pim.dst = 0;
    req_pim.width = 16; req_pim.sel_col = 16; req_pim.res_row = 0; req_pim.res_word = 4;
    send(HC_PIM, 2, 0, 0);
    chk(page_busy == 4'b0100, "only page 2 busy");
    // other pages keep working meanwhile
    req_wdata = {4{16'hbeef}}; send(HC_WRITE, 1, 3, 2);
    load(1, 3, 2, d); chk(d == {4{16'hbeef}}, "page 1 served while page 2 busy");
    chk(page_busy[2], "page 2 still busy");
    // page 2 stalls
    req_cmd = HC_READ; req_page = 2; req_row = 0; req_word = 4; req_valid = 1;
    #0.1 chk(!req_ready, "busy page stalls");
    @(posedge clk); while (!req_ready) @(posedge clk); #1 req_valid = 0;
    while (!rvalid) @(posedge clk);
    #0 d = rdata;
    begin
      int s; s = 0;
      for (int r = 0; r < ROWS; r++) s += 2 * 256 + r;
      chk(d == {4{16'(s)}}, $sformatf("page 2 sum %h", d));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
