// tb_pim_module: end-to-end test of the PIM rank: 8 chips, 4 crossbars per
// page per chip, full 1024x512 crossbars, with the page count reduced to 8
// (the default 1024 pages are too large to simulate).
//
// Two pages are loaded with a synthetic relation through ordinary block
// stores: every record (crossbar row) has a 24-bit "revenue" attribute at
// columns 40..63 (spanning two 16-bit reads), an 8-bit "key" at columns
// 96..103 and scratch columns from 200 on. The test then runs the
// operations a query uses:
//   filter   bulk-bitwise NOR / AND-NOT column operations compute
//            sel = key[0] & ~key[1] & ~key[2] & ~key[3] in every record;
//   host-gb  the host loads the filter bit-vector and checks it;
//   pim-gb   SUM (page A) and MIN / MAX (page B) of revenue over the
//            selected records with the aggregation circuits, page B running
//            while page A is busy; results are fetched with loads;
//   stall    a load to a busy page waits for the aggregation to finish;
//   UPDATE   the MUX-with-immediate request overwrites key of the selected
//            records, which is checked by loads;
//   row op   one row-wise OR.
// All expected values are computed from the generating hash functions.
// Each mechanism is counted; one that never happened counts as a failure.
module tb_pim_module;
  import pim_pkg::*;
  localparam int NP = 8, NX = N_CHIPS * XBS_PER_PAGE, ROWS = XB_ROWS;
  localparam int PW = $clog2(NP), AW = PW + 21, BW = N_CHIPS * XBS_PER_PAGE * RD_W;
  localparam int PA = 0, PB = NP - 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid, req_ready, rvalid;
  host_cmd_e req_cmd; logic [AW-1:0] req_addr; logic [BW-1:0] req_wdata, rdata;
  logic [NP-1:0] page_busy;
  int checks = 0, failures = 0;
  int n_filter = 0, n_hostread = 0, n_agg = 0, n_concurrent = 0, n_stall = 0,
      n_mux = 0, n_rowop = 0;

  pim_module #(.NPAGES(NP)) dut (.*);

  function automatic logic [31:0] hsh(int p, int x, int r, int salt);
    logic [31:0] h;
    h = 32'(p*131 + x*1031 + r*7 + salt*77777 + 12345);
    h = h * 32'h9E3779B1; h ^= h >> 15; h = h * 32'h85EBCA6B; h ^= h >> 13;
    return h;
  endfunction
  function automatic logic [23:0] rev(int p, int x, int r); return hsh(p, x, r, 1)[23:0]; endfunction
  function automatic logic [7:0]  key(int p, int x, int r); return hsh(p, x, r, 2)[7:0]; endfunction
  function automatic logic        sel(int p, int x, int r);
    logic [7:0] k; k = key(p, x, r); return k[0] & ~k[1] & ~k[2] & ~k[3];
  endfunction

  function automatic logic [AW-1:0] addr(int p, int r, int w);
    return AW'((longint'(p) << 21) | (longint'(r) << 11) | (longint'(w) << 6));
  endfunction

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // one host command; waits while the addressed page is busy
  task automatic send(host_cmd_e c, logic [AW-1:0] a, logic [BW-1:0] d);
    req_cmd = c; req_addr = a; req_wdata = d; req_valid = 1;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    #1 req_valid = 0;
  endtask

  task automatic load(int p, int r, int w, output logic [BW-1:0] d);
    send(HC_READ, addr(p, r, w), '0);
    while (!rvalid) @(posedge clk);
    #0 d = rdata;
    @(posedge clk); #1;
  endtask

  task automatic pim(int p, pim_req_t q);
    send(HC_PIM, addr(p, 0, 0), BW'(q));
  endtask

  task automatic wait_idle(int p);
    while (page_busy[p]) @(posedge clk);
    #1;
  endtask

  task automatic colop(int p, logic_fn_e f, int a, int b, int d);
    pim_req_t q; q = '0; q.op = PR_COL_LOGIC; q.fn = f;
    q.src_a = row_t'(a); q.src_b = row_t'(b); q.dst = row_t'(d);
    pim(p, q);
  endtask

  task automatic load_page(int p);
    logic [BW-1:0] d2, d3, d6, d12;
    for (int r = 0; r < ROWS; r++) begin
      for (int x = 0; x < NX; x++) begin
        logic [23:0] v; v = rev(p, x, r);
        d2[x*16 +: 16]  = {v[7:0], 8'h5a};
        d3[x*16 +: 16]  = v[23:8];
        d6[x*16 +: 16]  = {8'ha5, key(p, x, r)};
        d12[x*16 +: 16] = '0;
      end
      send(HC_WRITE, addr(p, r, 2), d2);
      send(HC_WRITE, addr(p, r, 3), d3);
      send(HC_WRITE, addr(p, r, 6), d6);
      send(HC_WRITE, addr(p, r, 12), d12);
    end
  endtask

  // sel = k0 & ~k1 & ~k2 & ~k3 into column 202
  task automatic filter(int p);
    colop(p, FN_ANDN, 96, 97, 200);   // k0 & ~k1
    colop(p, FN_NOR,  98, 99, 201);   // ~k2 & ~k3
    colop(p, FN_NOR, 201, 201, 203);  // ~(~k2 & ~k3)
    colop(p, FN_ANDN, 200, 203, 202); // sel
    n_filter++;
  endtask

  function automatic logic [63:0] exp_agg(int p, int x, agg_fn_e f);
    logic [63:0] e; e = agg_identity(f);
    for (int r = 0; r < ROWS; r++)
      if (sel(p, x, r)) begin
        logic [63:0] v; v = 64'(rev(p, x, r));
        case (f)
          AGG_SUM: e = e + v;
          AGG_MIN: e = (v < e) ? v : e;
          default: e = (v > e) ? v : e;
        endcase
      end
    return e;
  endfunction

  task automatic check_result(int p, int r, int w0, agg_fn_e f);
    logic [BW-1:0] d [4];
    for (int k = 0; k < 4; k++) load(p, r, w0 + k, d[k]);
    for (int x = 0; x < NX; x++) begin
      logic [63:0] got;
      got = {d[3][x*16 +: 16], d[2][x*16 +: 16], d[1][x*16 +: 16], d[0][x*16 +: 16]};
      chk(got == exp_agg(p, x, f), $sformatf("agg fn %0d page %0d xb %0d: %h vs %h",
          f, p, x, got, exp_agg(p, x, f)));
    end
  endtask

  pim_req_t q;
  logic [BW-1:0] d;
  int t0, stall_cycles;

  initial begin
    req_valid = 0; req_cmd = HC_READ; req_addr = '0; req_wdata = '0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    load_page(PA);
    load_page(PB);
    filter(PA);
    filter(PB);
    // host-gb style: read the filter bit-vector (column 202 = word 12 bit 10)
    for (int r = 0; r < 64; r++) begin
      load(PA, r, 12, d);
      for (int x = 0; x < NX; x++) chk(d[x*16 + 10] == sel(PA, x, r), "filter bit");
      n_hostread++;
    end
    // pim-gb: SUM on page A, result in row 0 words 20..23
    q = '0; q.op = PR_AGG; q.agg_fn = AGG_SUM; q.dst = 40; q.width = 24;
    q.sel_col = 9'd202; q.res_row = 0; q.res_word = 20;
    pim(PA, q); n_agg++;
    // page B runs MIN meanwhile
    q.agg_fn = AGG_MIN; q.res_word = 24;
    pim(PB, q); n_agg++;
    if (page_busy[PA] && page_busy[PB]) n_concurrent++;
    // a load to busy page A stalls until its aggregation is done
    t0 = $time; req_cmd = HC_READ; req_addr = addr(PA, 0, 20); req_valid = 1;
    stall_cycles = 0;
    @(posedge clk);
    while (!req_ready) begin stall_cycles++; @(posedge clk); end
    #1 req_valid = 0;
    if (stall_cycles > 0) n_stall++;
    // timing: 1 + ROWS*(1+2) + 1 + 4 cycles from acceptance of the aggregation
    chk(stall_cycles >= ROWS*3 && stall_cycles <= ROWS*3 + 6,
        $sformatf("aggregation latency %0d cycles", stall_cycles));
    @(posedge clk); #1;
    wait_idle(PB);
    check_result(PA, 0, 20, AGG_SUM);
    check_result(PB, 0, 24, AGG_MIN);
    q.agg_fn = AGG_MAX; q.res_word = 28;
    pim(PB, q); n_agg++;
    wait_idle(PB);
    check_result(PB, 0, 28, AGG_MAX);
    // UPDATE: key <- 8'h3c where selected (Alg. 1)
    q = '0; q.op = PR_MUX_IMM; q.dst = 96; q.width = 8; q.sel_col = 9'd202; q.imm = 64'h3c;
    pim(PA, q); n_mux++;
    wait_idle(PA);
    for (int r = 0; r < ROWS; r += 7) begin
      load(PA, r, 6, d);
      for (int x = 0; x < NX; x++)
        chk(d[x*16 +: 8] == (sel(PA, x, r) ? 8'h3c : key(PA, x, r)) && d[x*16+8 +: 8] == 8'ha5,
            $sformatf("update row %0d xb %0d", r, x));
    end
    // row op: row 5 <- row 6 | row 7
    q = '0; q.op = PR_ROW_LOGIC; q.fn = FN_OR; q.src_a = 6; q.src_b = 7; q.dst = 5;
    pim(PB, q); n_rowop++;
    load(PB, 5, 6, d);
    for (int x = 0; x < NX; x++)
      chk(d[x*16 +: 8] == (key(PB, x, 6) | key(PB, x, 7)), "row op");
    load(PB, 5, 3, d);
    for (int x = 0; x < NX; x++)
      chk(d[x*16 +: 16] == (rev(PB, x, 6)[23:8] | rev(PB, x, 7)[23:8]), "row op rev");

    $display("mechanisms: filter=%0d host_reads=%0d agg=%0d concurrent_pages=%0d stall=%0d mux_update=%0d row_op=%0d",
             n_filter, n_hostread, n_agg, n_concurrent, n_stall, n_mux, n_rowop);
    chk(n_filter > 0 && n_hostread > 0 && n_agg > 0 && n_concurrent > 0 && n_stall > 0 &&
        n_mux > 0 && n_rowop > 0, "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
