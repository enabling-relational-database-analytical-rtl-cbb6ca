// pim_chip: one PIM memory chip of the rank, holding NPAGES page slices
// (pim_page), each with its own PIM controller.
//
// The chip receives every host command of the rank: a load, a store or a
// PIM request, with the page, row and 16-bit word it addresses. It routes
// the command to the page slice named by `page`; page slices are
// independent, so a long operation on one page (an aggregation, a MUX)
// does not block loads, stores or PIM requests to other pages. `req_ready`
// is the addressed page's ready: a command to a busy page stalls.
// Read data of the addressed page is returned on `rdata` with `rvalid`, two
// cycles after acceptance; since each page answers a fixed time after its
// own accept, at most one page answers in a cycle and the answers are ORed.
//
// The chip's contents follow the paper (per-page controllers, 4 crossbars
// per page per chip). The paper's rank has 16384 pages, so each chip holds
// 16384 page slices; the default NPAGES is scaled down to 512 because the
// elaboration tools cannot hold half a million crossbar instances.
module pim_chip
  import pim_pkg::*;
#(
  parameter int unsigned ROWS   = XB_ROWS,
  parameter int unsigned COLS   = XB_COLS,
  parameter int unsigned XBS    = XBS_PER_PAGE,
  parameter int unsigned NPAGES = N_PAGES_DFLT,
  localparam int unsigned PW    = (NPAGES > 1) ? $clog2(NPAGES) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        req_valid,
  output logic                        req_ready,
  input  host_cmd_e                   req_cmd,
  input  logic [PW-1:0]               req_page,
  input  row_t                        req_row,
  input  word_t                       req_word,
  input  logic [XBS*RD_W-1:0]         req_wdata,
  input  pim_req_t                    req_pim,
  output logic                        rvalid,
  output logic [XBS*RD_W-1:0]         rdata,
  output logic [NPAGES-1:0]           page_busy
);

  logic [NPAGES-1:0]         pg_ready, pg_rvalid;
  logic [XBS*RD_W-1:0]       pg_rdata [NPAGES];
  logic [XBS*AGG_W-1:0]      pg_agg   [NPAGES];

  for (genvar p = 0; p < NPAGES; p++) begin : g_page
    pim_page #(.ROWS(ROWS), .COLS(COLS), .XBS(XBS)) u_page (
      .clk        (clk),
      .rst_n      (rst_n),
      .req_valid  (req_valid && (req_page == PW'(p))),
      .req_ready  (pg_ready[p]),
      .req_cmd    (req_cmd),
      .req_row    (req_row),
      .req_word   (req_word),
      .req_wdata  (req_wdata),
      .req_pim    (req_pim),
      .rvalid     (pg_rvalid[p]),
      .rdata      (pg_rdata[p]),
      .busy       (page_busy[p]),
      .agg_result (pg_agg[p])
    );
  end

  assign req_ready = pg_ready[req_page];

  always_comb begin
    rvalid = |pg_rvalid;
    rdata  = '0;
    for (int p = 0; p < NPAGES; p++)
      if (pg_rvalid[p]) rdata |= pg_rdata[p];
  end

  // the aggregation registers are read through the array, not from here
  logic unused_agg;
  always_comb begin
    unused_agg = 1'b0;
    for (int p = 0; p < NPAGES; p++) unused_agg ^= ^pg_agg[p];
  end

  always_ff @(posedge clk) begin
    if (rst_n)
      a_one_reader: assert ((pg_rvalid & (pg_rvalid - 1'b1)) == '0)
        else $error("two pages returned read data in one cycle");
  end

endmodule
