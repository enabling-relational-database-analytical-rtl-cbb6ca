// pim_crossbar: functional model of one RRAM memory crossbar used as a
// bulk-bitwise processing unit.
//
// The array holds ROWS x COLS cells; one database record sits in one row and
// every attribute occupies the same columns in all rows. Besides ordinary
// accesses the array computes in place:
//   * column operation: for every row r at once,
//       cell[r][dst] <= fn(cell[r][a], cell[r][b])
//     which is how a filter or the MUX algorithm touches one attribute bit of
//     all records in a single logic cycle;
//   * row operation: cell[dst][*] <= fn(cell[a][*], cell[b][*]) over all
//     columns, the transposed form of the same operation.
// fn is NOR (the basic crossbar gate), OR or AND-NOT. A 16-bit word write
// (host store or aggregation result, through the write control) replaces
// one word of one row. The whole addressed row is presented on row_q
// combinationally; the read circuit picks the 16-bit word from it.
//
// Timing: every command completes at the clock edge that samples it, i.e.
// one command per cycle; one cycle stands for one bulk-bitwise logic cycle
// (30 ns in the evaluated module). The analog details of in-memory logic
// (MAGIC-style output initialisation, voltages) are not modelled; the paper
// names NOR as the basic operation and uses OR / AND-NOT in its MUX
// algorithm, the rest of this interface is this design's choice.
module pim_crossbar
  import pim_pkg::*;
#(
  parameter int unsigned ROWS = XB_ROWS,
  parameter int unsigned COLS = XB_COLS
) (
  input  logic                    clk,
  input  xb_cmd_e                 cmd,
  input  logic_fn_e               fn,
  input  logic [ROW_AW-1:0]       a,      // input column (col op) / row (row op)
  input  logic [ROW_AW-1:0]       b,
  input  logic [ROW_AW-1:0]       dst,    // output column / row
  input  logic [ROW_AW-1:0]       row,    // row of a word read or write
  input  logic [WORD_AW-1:0]      word,   // word of a word write
  input  logic [RD_W-1:0]         wdata,
  output logic [COLS-1:0]         row_q   // contents of row `row`
);

  localparam int unsigned RA = $clog2(ROWS);
  localparam int unsigned CA = $clog2(COLS);

  logic [COLS-1:0] mem [ROWS];

  function automatic logic f_bit(logic_fn_e f, logic x, logic y);
    unique case (f)
      FN_NOR:  return ~(x | y);
      FN_OR:   return x | y;
      FN_ANDN: return x & ~y;
      default: return x;
    endcase
  endfunction

  function automatic logic [COLS-1:0] f_vec(logic_fn_e f, logic [COLS-1:0] x,
                                            logic [COLS-1:0] y);
    unique case (f)
      FN_NOR:  return ~(x | y);
      FN_OR:   return x | y;
      FN_ANDN: return x & ~y;
      default: return x;
    endcase
  endfunction

  always_ff @(posedge clk) begin
    unique case (cmd)
      XC_COLOP: begin
        for (int r = 0; r < ROWS; r++)
          mem[r][dst[CA-1:0]] <= f_bit(fn, mem[r][a[CA-1:0]], mem[r][b[CA-1:0]]);
      end
      XC_ROWOP: mem[dst[RA-1:0]] <= f_vec(fn, mem[a[RA-1:0]], mem[b[RA-1:0]]);
      XC_WRITE: mem[row[RA-1:0]][word*RD_W +: RD_W] <= wdata;
      default: ;
    endcase
  end

  assign row_q = mem[row[RA-1:0]];

endmodule
