// pim_pkg: shared sizes, encodings and request types of the bulk-bitwise
// PIM memory module.
//
// Sizes follow the evaluated RRAM PIM module: 1024x512 crossbars, 16-bit
// crossbar reads, 2 MB huge pages spread over 8 chips of a single rank, and a
// 64-byte host block. A 2 MB page holds 16 Mbit = 32 crossbars, i.e. 4
// crossbars on each of the 8 chips; a 64-byte block is one 16-bit word from
// each of those 32 crossbars. The request encodings (opcodes, field layout
// of the PIM request payload) are this design's own choice: the paper only
// says that a PIM request carries an address, which names the page, and data
// that detail the computation, operands and result location.
package pim_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned XB_ROWS      = 1024;  // crossbar rows (records)
  localparam int unsigned XB_COLS      = 512;   // crossbar columns (bits)
  localparam int unsigned RD_W         = 16;    // crossbar read length
  localparam int unsigned XB_WORDS     = XB_COLS / RD_W;   // 32 words/row
  localparam int unsigned N_CHIPS      = 8;     // PIM chips in the rank
  localparam int unsigned XBS_PER_PAGE = 4;     // crossbars of a page per chip
  localparam int unsigned BLOCK_BITS   = 512;   // 64-byte host block
  localparam int unsigned CHIP_BITS    = BLOCK_BITS / N_CHIPS;  // 64
  // 32 GB / 2 MB huge pages
  localparam int unsigned N_PAGES_FULL = 16384;
  // default page count of the RTL: the full 16384 pages (524288 crossbars)
  // cannot be elaborated in 32 GB (about 14 MB per page when linted), so the
  // default holds 512 pages (a 1 GB rank)
  localparam int unsigned N_PAGES_DFLT = 512;
  localparam int unsigned AGG_W        = 64;    // aggregation register width
  // widest operand buffer: a 64-bit attribute at any bit offset spans 5 reads
  localparam int unsigned OPB_W        = AGG_W + RD_W;
  localparam int unsigned MAX_NRD      = OPB_W / RD_W;     // 5
  localparam int unsigned RES_WORDS    = AGG_W / RD_W;     // 4

  localparam int unsigned ROW_AW  = $clog2(XB_ROWS);   // 10
  localparam int unsigned COL_AW  = $clog2(XB_COLS);   // 9
  localparam int unsigned WORD_AW = $clog2(XB_WORDS);  // 5
  localparam int unsigned WID_W   = $clog2(AGG_W) + 1; // 7: 1..64

  typedef logic [ROW_AW-1:0]  row_t;
  typedef logic [COL_AW-1:0]  col_t;
  typedef logic [WORD_AW-1:0] word_t;
  typedef logic [RD_W-1:0]    rd_t;

  // ------------------------------------------------ bulk-bitwise functions
  // NOR is the basic in-crossbar operation; OR and AND-NOT are the two steps
  // of the MUX-with-immediate algorithm.
  typedef enum logic [1:0] {
    FN_NOR  = 2'd0,   // out = ~(a | b)
    FN_OR   = 2'd1,   // out = a | b
    FN_ANDN = 2'd2    // out = a & ~b
  } logic_fn_e;

  typedef enum logic [1:0] {
    AGG_SUM = 2'd0,
    AGG_MIN = 2'd1,
    AGG_MAX = 2'd2
  } agg_fn_e;

  // --------------------------------------------------- host-side commands
  typedef enum logic [1:0] {
    HC_READ  = 2'd0,   // standard load of a 64-byte block
    HC_WRITE = 2'd1,   // standard store of a 64-byte block
    HC_PIM   = 2'd2    // PIM request: address names the page, data the work
  } host_cmd_e;

  // PIM request kinds
  typedef enum logic [2:0] {
    PR_COL_LOGIC = 3'd0,  // column-wise op on every row of every crossbar
    PR_ROW_LOGIC = 3'd1,  // row-wise op on one row of every crossbar
    PR_MUX_IMM   = 3'd2,  // Alg. 1: v <- s ? c : v, c immediate, s in memory
    PR_AGG       = 3'd3   // aggregate a selected attribute into the circuit
  } pim_op_e;

  // PIM request payload, carried in the low bits of the store data.
  typedef struct packed {
    logic [AGG_W-1:0] imm;      // MUX immediate value c
    row_t             res_row;  // AGG: row of the result
    word_t            res_word; // AGG: first word of the 4-word result
    col_t             sel_col;  // MUX/AGG: select (filter) bit column
    logic [WID_W-1:0] width;    // MUX/AGG: attribute width in bits (1..64)
    row_t             dst;      // logic: output column/row; MUX/AGG: attr LSB column
    row_t             src_b;    // logic: second input column/row
    row_t             src_a;    // logic: first input column/row
    agg_fn_e          agg_fn;
    logic_fn_e        fn;
    pim_op_e          op;
  } pim_req_t;

  localparam int unsigned PIM_REQ_W = $bits(pim_req_t);

  // Command broadcast by a PIM controller to the crossbars of its page.
  typedef enum logic [2:0] {
    XC_NOP   = 3'd0,
    XC_COLOP = 3'd1,  // column op over all rows
    XC_ROWOP = 3'd2,  // row op over all columns
    XC_READ  = 3'd3,  // 16-bit word read (host load)
    XC_WRITE = 3'd4   // 16-bit word write (host store or aggregation result)
  } xb_cmd_e;

  // Control of the aggregation circuits of a page.
  typedef enum logic [2:0] {
    AC_NONE  = 3'd0,
    AC_CLEAR = 3'd1,  // load the register with the function's identity
    AC_SEL   = 3'd2,  // capture the select bit from this read
    AC_SHIFT = 3'd3,  // buffer this read as part of the operand
    AC_LAST  = 3'd4   // last read of the operand: shift, mask, apply ALU
  } agg_ctl_e;

  typedef struct packed {
    xb_cmd_e          cmd;
    logic_fn_e        fn;
    row_t             a;          // column (low 9 bits) or row index
    row_t             b;
    row_t             dst;
    row_t             row;
    word_t            word;
    logic             wr_agg;     // write source: 1 = aggregation register
    logic [1:0]       res_idx;    // which 16-bit word of the result
    agg_ctl_e         agg_ctl;
    agg_fn_e          agg_fn;
    logic [3:0]       sel_bit;    // bit of the read word holding the select
    logic [3:0]       offset;     // attribute LSB position in its first word
    logic [WID_W-1:0] width;
    logic [2:0]       rd_idx;     // index of this read within the operand
  } xb_ctl_t;

  // Aggregation identity values (unsigned MIN/MAX).
  function automatic logic [AGG_W-1:0] agg_identity(agg_fn_e f);
    return (f == AGG_MIN) ? '1 : '0;
  endfunction

endpackage
