// pim_controller: the PIM controller dedicated to one huge page on one chip.
//
// Every page has its own controller on every chip, so pages compute
// independently. The controller accepts one request at a time (valid/ready)
// and turns it into a sequence of commands, `ctl`, broadcast to all the
// crossbars of its page, one command per cycle (one bulk-bitwise logic
// cycle):
//   HC_READ / HC_WRITE   one 16-bit word read or write in every crossbar
//                        (a host load or store of a 64-byte block);
//                        read data is valid on the tiles' outputs when
//                        `rvalid` is high, two cycles after acceptance.
//   PR_COL_LOGIC / PR_ROW_LOGIC  one bulk-bitwise operation (NOR, OR,
//                        AND-NOT) on columns or rows, 1 cycle.
//   PR_MUX_IMM           the paper's MUX between an in-memory attribute and
//                        an immediate (Alg. 1): for each attribute bit i,
//                        v_i <- v_i OR s if c_i = 1, else v_i <- v_i AND NOT s,
//                        with s the select column; `width` cycles. This is how
//                        UPDATE is done without reading the relation.
//   PR_AGG               aggregation through the aggregation circuits: clear
//                        the register, then for every row read the select
//                        word and the 1..5 words holding the attribute, then
//                        one drain cycle and four 16-bit writes of the 64-bit
//                        result to (res_row, res_word .. res_word+3).
//                        Takes 1 + ROWS*(1+nrd) + 1 + 4 cycles (busy for all
//                        but the accepting cycle), with nrd
//                        the number of 16-bit reads the attribute spans,
//                        independent of how many records are selected.
// While a multi-cycle request runs, req_ready is low: a further request to
// this page stalls, other pages proceed.
//
// What the controller does is the paper's; the one-cycle-per-operation
// timing, the request encoding, the select-word read per record and the
// write-back format are this design's choice.
module pim_controller
  import pim_pkg::*;
#(
  parameter int unsigned ROWS = XB_ROWS,
  parameter int unsigned XBS  = XBS_PER_PAGE
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 req_valid,
  output logic                 req_ready,
  input  host_cmd_e            req_cmd,
  input  row_t                 req_row,
  input  word_t                req_word,
  input  logic [XBS*RD_W-1:0]  req_wdata,
  input  pim_req_t             req_pim,
  output xb_ctl_t              ctl,
  output logic [XBS*RD_W-1:0]  wdata,
  output logic                 rvalid,
  output logic                 busy
);

  localparam int unsigned RCW = $clog2(ROWS) + 1;

  typedef enum logic [2:0] {
    S_IDLE, S_MUX, S_AGG_SEL, S_AGG_VAL, S_AGG_DRAIN, S_AGG_WB
  } state_e;

  state_e           st;
  pim_req_t         rq;        // latched PIM request
  logic [WID_W-1:0] bit_i;
  logic [RCW-1:0]   row_i;
  logic [2:0]       k, nrd;
  logic [1:0]       wb_i;
  logic             rd_pend;

  logic accept;
  assign req_ready = (st == S_IDLE);
  assign accept    = req_valid && req_ready;
  assign busy      = (st != S_IDLE);

  // reads an attribute spans: bit offset in its first word plus width
  function automatic logic [2:0] n_reads(row_t lsb_col, logic [WID_W-1:0] w);
    logic [WID_W:0] last_bit;
    last_bit = (WID_W+1)'(lsb_col[3:0]) + (WID_W+1)'(w) - 1'b1;
    return 3'(last_bit >> 4) + 3'd1;
  endfunction

  function automatic logic_fn_e mux_fn(logic c);
    return c ? FN_OR : FN_ANDN;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= S_IDLE;
      ctl     <= '0;
      wdata   <= '0;
      rq      <= '0;
      bit_i   <= '0;
      row_i   <= '0;
      k       <= '0;
      nrd     <= '0;
      wb_i    <= '0;
      rd_pend <= 1'b0;
      rvalid  <= 1'b0;
    end else begin
      ctl     <= '0;                 // NOP unless set below
      rd_pend <= 1'b0;
      rvalid  <= rd_pend;
      unique case (st)
        S_IDLE: if (req_valid) begin
          unique case (req_cmd)
            HC_READ: begin
              ctl.cmd  <= XC_READ;
              ctl.row  <= req_row;
              ctl.word <= req_word;
              rd_pend  <= 1'b1;
            end
            HC_WRITE: begin
              ctl.cmd  <= XC_WRITE;
              ctl.row  <= req_row;
              ctl.word <= req_word;
              wdata    <= req_wdata;
            end
            HC_PIM: begin
              rq <= req_pim;
              unique case (req_pim.op)
                PR_COL_LOGIC, PR_ROW_LOGIC: begin
                  ctl.cmd <= (req_pim.op == PR_COL_LOGIC) ? XC_COLOP : XC_ROWOP;
                  ctl.fn  <= req_pim.fn;
                  ctl.a   <= req_pim.src_a;
                  ctl.b   <= req_pim.src_b;
                  ctl.dst <= req_pim.dst;
                end
                PR_MUX_IMM: begin
                  ctl.cmd <= XC_COLOP;
                  ctl.fn  <= mux_fn(req_pim.imm[0]);
                  ctl.a   <= req_pim.dst;
                  ctl.b   <= row_t'(req_pim.sel_col);
                  ctl.dst <= req_pim.dst;
                  bit_i   <= WID_W'(1);
                  if (req_pim.width > WID_W'(1)) st <= S_MUX;
                end
                PR_AGG: begin
                  ctl.agg_ctl <= AC_CLEAR;
                  ctl.agg_fn  <= req_pim.agg_fn;
                  row_i       <= '0;
                  nrd         <= n_reads(req_pim.dst, req_pim.width);
                  st          <= S_AGG_SEL;
                end
                default: ;
              endcase
            end
            default: ;
          endcase
        end

        S_MUX: begin
          ctl.cmd <= XC_COLOP;
          ctl.fn  <= mux_fn(rq.imm[bit_i[WID_W-2:0]]);
          ctl.a   <= rq.dst + row_t'(bit_i);
          ctl.b   <= row_t'(rq.sel_col);
          ctl.dst <= rq.dst + row_t'(bit_i);
          bit_i   <= bit_i + 1'b1;
          if (bit_i == rq.width - 1'b1) st <= S_IDLE;
        end

        S_AGG_SEL: begin
          ctl.cmd     <= XC_READ;
          ctl.row     <= row_t'(row_i);
          ctl.word    <= rq.sel_col[COL_AW-1:4];
          ctl.agg_ctl <= AC_SEL;
          ctl.agg_fn  <= rq.agg_fn;
          ctl.sel_bit <= rq.sel_col[3:0];
          k           <= '0;
          st          <= S_AGG_VAL;
        end

        S_AGG_VAL: begin
          ctl.cmd     <= XC_READ;
          ctl.row     <= row_t'(row_i);
          ctl.word    <= rq.dst[COL_AW-1:4] + word_t'(k);
          ctl.agg_ctl <= (k == nrd - 1'b1) ? AC_LAST : AC_SHIFT;
          ctl.agg_fn  <= rq.agg_fn;
          ctl.offset  <= rq.dst[3:0];
          ctl.width   <= rq.width;
          ctl.rd_idx  <= k;
          if (k == nrd - 1'b1) begin
            if (row_i == RCW'(ROWS - 1)) st <= S_AGG_DRAIN;
            else begin
              row_i <= row_i + 1'b1;
              st    <= S_AGG_SEL;
            end
          end else begin
            k <= k + 1'b1;
          end
        end

        S_AGG_DRAIN: begin
          wb_i <= '0;
          st   <= S_AGG_WB;
        end

        S_AGG_WB: begin
          ctl.cmd     <= XC_WRITE;
          ctl.row     <= rq.res_row;
          ctl.word    <= rq.res_word + word_t'(wb_i);
          ctl.wr_agg  <= 1'b1;
          ctl.res_idx <= wb_i;
          wb_i        <= wb_i + 1'b1;
          if (wb_i == 2'(RES_WORDS - 1)) st <= S_IDLE;
        end

        default: st <= S_IDLE;
      endcase
    end
  end

  // A MUX or aggregation request must name an attribute of 1..64 bits.
  always_ff @(posedge clk) begin
    if (rst_n && accept && req_cmd == HC_PIM &&
        (req_pim.op == PR_MUX_IMM || req_pim.op == PR_AGG))
      a_width_ok: assert (req_pim.width != '0 && req_pim.width <= WID_W'(AGG_W))
        else $error("PIM request with attribute width %0d", req_pim.width);
  end

endmodule
