// pim_xb_tile: one crossbar with its peripherals as drawn for the
// aggregation extension: the RRAM array, the read circuit, the aggregation
// circuit underneath it, and the write control.
//
// All tiles of a page receive the same command `ctl` from their PIM
// controller, so bulk-bitwise operations and aggregations run on all of a
// page's crossbars at once. A word read (XC_READ) appears on `rdata` one
// cycle later. The aggregation control travelling with a read is delayed by
// the same cycle, so the aggregation circuit sees each read together with
// its command. The write control chooses the data of a word write: the host
// store data `wdata`, or (ctl.wr_agg) word ctl.res_idx of the aggregation
// register, which is how the final aggregate is written back into the
// array, where the host fetches it with ordinary loads.
//
// The composition follows Fig. 4 of the paper; the one-cycle read latency
// and the two-source write multiplexer are this design's choice.
module pim_xb_tile
  import pim_pkg::*;
#(
  parameter int unsigned ROWS = XB_ROWS,
  parameter int unsigned COLS = XB_COLS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  xb_ctl_t           ctl,
  input  logic [RD_W-1:0]   wdata,
  output logic [RD_W-1:0]   rdata,
  output logic [AGG_W-1:0]  agg_result
);

  logic [COLS-1:0] row_q;
  logic [RD_W-1:0] xb_wdata;
  xb_ctl_t         ctl_d;   // control delayed to line up with read data

  // write control: host data or aggregation result
  assign xb_wdata = ctl.wr_agg ? agg_result[ctl.res_idx*RD_W +: RD_W] : wdata;

  pim_crossbar #(.ROWS(ROWS), .COLS(COLS)) u_xb (
    .clk   (clk),
    .cmd   (ctl.cmd),
    .fn    (ctl.fn),
    .a     (ctl.a),
    .b     (ctl.b),
    .dst   (ctl.dst),
    .row   (ctl.row),
    .word  (ctl.word),
    .wdata (xb_wdata),
    .row_q (row_q)
  );

  pim_read_circuit #(.COLS(COLS)) u_rd (
    .clk   (clk),
    .rst_n (rst_n),
    .en    (ctl.cmd == XC_READ),
    .row_q (row_q),
    .word  (ctl.word),
    .q     (rdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ctl_d <= '0;
    else        ctl_d <= ctl;
  end

  pim_agg_circuit u_agg (
    .clk     (clk),
    .rst_n   (rst_n),
    .ctl     (ctl_d.agg_ctl),
    .fn      (ctl_d.agg_fn),
    .sel_bit (ctl_d.sel_bit),
    .offset  (ctl_d.offset),
    .width   (ctl_d.width),
    .rd_idx  (ctl_d.rd_idx),
    .rdata   (rdata),
    .result  (agg_result)
  );

endmodule
