// pim_module: the bulk-bitwise PIM module, one memory rank of NCHIPS PIM
// chips, as seen by the host's memory controller.
//
// The host talks to the rank with standard 64-byte loads and stores and
// with PIM requests. A PIM request looks like a store: its address names
// the huge page to compute on, and its data (a pim_req_t in the low bits)
// name the operation, operands and result location. Because requests name
// a single page, they work with virtual memory: the host translates the
// virtual address as for any store.
//
// Byte address layout of the rank (2 MB pages, 64-byte blocks):
//   addr[5:0]    byte in the 64-byte block (ignored, whole blocks only)
//   addr[10:6]   16-bit word of the crossbar row      (32 words)
//   addr[20:11]  crossbar row                          (1024 rows)
//   addr[..:21]  page
// A block is one 16-bit word from each of the page's 32 crossbars: chip c,
// tile t holds bits 16(4c+t) .. 16(4c+t)+15 of the block. A record lives in
// one crossbar row, so reading one record's word brings the same word of
// 31 other records along.
//
// The chips run in lock-step: every command goes to every chip, and since
// they are identical they accept it in the same cycle (req_ready is their
// AND; an assertion checks they agree). Loads return `rdata` with `rvalid`
// two cycles after acceptance. `page_busy` shows which pages are running a
// PIM request (taken from chip 0).
//
// The rank organisation (one rank, 8 chips, 2 MB pages, 1024x512 crossbars,
// 16-bit reads) is the paper's; the command interface and address layout
// are this design's choice. The host processor and the DRAM ranks beside
// this one are outside the design.
module pim_module
  import pim_pkg::*;
#(
  parameter int unsigned ROWS   = XB_ROWS,
  parameter int unsigned COLS   = XB_COLS,
  parameter int unsigned XBS    = XBS_PER_PAGE,
  parameter int unsigned NCHIPS = N_CHIPS,
  parameter int unsigned NPAGES = N_PAGES_DFLT,
  localparam int unsigned PW    = (NPAGES > 1) ? $clog2(NPAGES) : 1,
  localparam int unsigned AW    = PW + 21,
  localparam int unsigned BW    = NCHIPS * XBS * RD_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req_valid,
  output logic               req_ready,
  input  host_cmd_e          req_cmd,
  input  logic [AW-1:0]      req_addr,
  input  logic [BW-1:0]      req_wdata,
  output logic               rvalid,
  output logic [BW-1:0]      rdata,
  output logic [NPAGES-1:0]  page_busy
);

  localparam int unsigned CW = XBS * RD_W;

  logic [PW-1:0]     a_page;
  row_t              a_row;
  word_t             a_word;
  pim_req_t          pim;
  logic [NCHIPS-1:0] c_ready, c_rvalid;
  logic [NPAGES-1:0] c_busy [NCHIPS];

  assign a_word = req_addr[10:6];
  assign a_row  = req_addr[20:11];
  assign a_page = (NPAGES > 1) ? req_addr[AW-1:21] : '0;
  assign pim    = req_wdata[$bits(pim_req_t)-1:0];

  for (genvar c = 0; c < NCHIPS; c++) begin : g_chip
    pim_chip #(.ROWS(ROWS), .COLS(COLS), .XBS(XBS), .NPAGES(NPAGES)) u_chip (
      .clk       (clk),
      .rst_n     (rst_n),
      .req_valid (req_valid),
      .req_ready (c_ready[c]),
      .req_cmd   (req_cmd),
      .req_page  (a_page),
      .req_row   (a_row),
      .req_word  (a_word),
      .req_wdata (req_wdata[c*CW +: CW]),
      .req_pim   (pim),
      .rvalid    (c_rvalid[c]),
      .rdata     (rdata[c*CW +: CW]),
      .page_busy (c_busy[c])
    );
  end

  assign req_ready = &c_ready;
  assign rvalid    = c_rvalid[0];
  assign page_busy = c_busy[0];

  logic unused;
  always_comb begin
    unused = ^req_addr[5:0];
    for (int c = 1; c < NCHIPS; c++) unused ^= c_rvalid[c] ^ (^c_busy[c]);
  end

  always_ff @(posedge clk) begin
    if (rst_n)
      a_lockstep: assert ((c_ready == '0) || (c_ready == '1))
        else $error("chips disagree on req_ready");
  end

endmodule
