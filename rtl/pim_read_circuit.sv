// pim_read_circuit: the crossbar read path, which returns a fixed-length
// 16-bit word out of the sensed crossbar row.
//
// Crossbar reads have a fixed length (16 bits in the evaluated module), so a
// row of COLS bits is read as COLS/16 words. This block selects word `word`
// of the row presented by the array (bits word*16 .. word*16+15, column 0
// being bit 0) and registers it, standing in for the sense amplifiers'
// latch. Output timing: data for the word addressed in cycle t is on `q` in
// cycle t+1 when `en` was high in cycle t; q holds otherwise. The paper only
// names this block (Fig. 4); the column multiplexer and the output register
// are this design's choice.
module pim_read_circuit
  import pim_pkg::*;
#(
  parameter int unsigned COLS = XB_COLS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               en,
  input  logic [COLS-1:0]    row_q,
  input  logic [WORD_AW-1:0] word,
  output logic [RD_W-1:0]    q
);

  logic [RD_W-1:0] sel;
  assign sel = row_q[word*RD_W +: RD_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  q <= '0;
    else if (en) q <= sel;
  end

endmodule
