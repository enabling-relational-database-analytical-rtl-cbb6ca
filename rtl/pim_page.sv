// pim_page: the part of one 2 MB huge page that lives on one chip: its PIM
// controller and the XBS crossbar tiles it drives.
//
// A 2 MB page is 32 crossbars of 1024x512 bits spread evenly over the 8
// chips of the rank, so each chip holds 4 crossbars of every page (the
// default of XBS). All tiles receive the same controller command, so every
// bulk-bitwise operation and every aggregation runs on all of them at once,
// each on its own 1024 records. A host load or store addresses the same
// (row, word) in every tile: tile t supplies or takes bits 16t..16t+15 of
// the chip's 64-bit share of the block.
//
// Interface and timing are those of pim_controller; read data is valid on
// `rdata` while `rvalid` is high, two cycles after the read is accepted.
// `agg_result` exposes every tile's aggregation register for observation.
// The split into per-chip page slices follows the paper; the bit mapping of
// the block onto tiles is this design's choice.
module pim_page
  import pim_pkg::*;
#(
  parameter int unsigned ROWS = XB_ROWS,
  parameter int unsigned COLS = XB_COLS,
  parameter int unsigned XBS  = XBS_PER_PAGE
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    req_valid,
  output logic                    req_ready,
  input  host_cmd_e               req_cmd,
  input  row_t                    req_row,
  input  word_t                   req_word,
  input  logic [XBS*RD_W-1:0]     req_wdata,
  input  pim_req_t                req_pim,
  output logic                    rvalid,
  output logic [XBS*RD_W-1:0]     rdata,
  output logic                    busy,
  output logic [XBS*AGG_W-1:0]    agg_result
);

  xb_ctl_t             ctl;
  logic [XBS*RD_W-1:0] wdata;

  pim_controller #(.ROWS(ROWS), .XBS(XBS)) u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .req_valid (req_valid),
    .req_ready (req_ready),
    .req_cmd   (req_cmd),
    .req_row   (req_row),
    .req_word  (req_word),
    .req_wdata (req_wdata),
    .req_pim   (req_pim),
    .ctl       (ctl),
    .wdata     (wdata),
    .rvalid    (rvalid),
    .busy      (busy)
  );

  for (genvar t = 0; t < XBS; t++) begin : g_xb
    pim_xb_tile #(.ROWS(ROWS), .COLS(COLS)) u_tile (
      .clk        (clk),
      .rst_n      (rst_n),
      .ctl        (ctl),
      .wdata      (wdata[t*RD_W +: RD_W]),
      .rdata      (rdata[t*RD_W +: RD_W]),
      .agg_result (agg_result[t*AGG_W +: AGG_W])
    );
  end

endmodule
