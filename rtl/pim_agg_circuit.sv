// pim_agg_circuit: aggregation circuit added to the periphery of one crossbar
// (ALU plus aggregation register).
//
// The PIM controller reads the crossbar row by row; for every record it
// first reads the word holding the record's select (filter) bit, then the
// one to five words holding the aggregated attribute. The circuit follows
// the controller's per-read command `ctl`:
//   AC_CLEAR  load the register with the identity of `fn` (0 for SUM/MAX,
//             all ones for MIN);
//   AC_SEL    latch bit `sel_bit` of the read as the record's select bit;
//   AC_SHIFT  store the read at position `rd_idx` of the operand buffer;
//   AC_LAST   the read completes the operand: the ALU shifts and masks it
//             and, if the record is selected, updates the register.
// `result` is the aggregation register; the crossbar's write control copies
// it back into the array, 16 bits at a time.
//
// Timing: `ctl` and `rdata` belong to the same cycle; the register updates at
// that clock edge, so a record costs one cycle per read. The structure (ALU
// feeding a register that feeds back, Fig. 4) is the paper's; the select-bit
// read and the operand buffer are this design's choice, since the paper does
// not say how unselected records are excluded.
module pim_agg_circuit
  import pim_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  agg_ctl_e           ctl,
  input  agg_fn_e            fn,
  input  logic [3:0]         sel_bit,
  input  logic [3:0]         offset,
  input  logic [WID_W-1:0]   width,
  input  logic [2:0]         rd_idx,
  input  logic [RD_W-1:0]    rdata,
  output logic [AGG_W-1:0]   result
);

  logic [AGG_W-1:0] acc;
  logic             sel;
  logic [OPB_W-1:0] opbuf, opfull;
  logic [AGG_W-1:0] alu_res, alu_opnd;

  always_comb begin
    opfull = opbuf;
    opfull[rd_idx*RD_W +: RD_W] = rdata;
  end

  pim_agg_alu u_alu (
    .fn      (fn),
    .acc     (acc),
    .opbuf   (opfull),
    .offset  (offset),
    .width   (width),
    .operand (alu_opnd),
    .result  (alu_res)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc   <= '0;
      sel   <= 1'b0;
      opbuf <= '0;
    end else begin
      unique case (ctl)
        AC_CLEAR: begin
          acc   <= agg_identity(fn);
          opbuf <= '0;
        end
        AC_SEL:   sel   <= rdata[sel_bit];
        AC_SHIFT: opbuf <= opfull;
        AC_LAST: begin
          if (sel) acc <= alu_res;
          opbuf <= '0;
        end
        default: ;
      endcase
    end
  end

  assign result = acc;

  // The ALU's operand output is for observation only.
  logic unused_opnd;
  assign unused_opnd = ^alu_opnd;

endmodule
