// pim_agg_alu: the ALU of the per-crossbar aggregation circuit.
//
// It combines the aggregation register `acc` with one attribute value using
// SUM, MIN or MAX, the three aggregation functions the circuit supports. The
// attribute arrives as up to five consecutive 16-bit crossbar reads packed
// into `opbuf` (read k in bits 16k..16k+15). Because crossbar reads have a
// fixed 16-bit length while attributes may be wider and start at any column,
// the ALU first shifts the buffer right by `offset` (the attribute's bit
// position inside its first read) and masks it to `width` bits (1..64).
// MIN and MAX compare unsigned; SUM wraps modulo 2^64.
//
// Purely combinational. The paper gives the functions and the need for
// shifting and masking; the 64-bit register width, unsigned comparison and
// the barrel-shift/mask structure are this design's choice.
module pim_agg_alu
  import pim_pkg::*;
(
  input  agg_fn_e            fn,
  input  logic [AGG_W-1:0]   acc,
  input  logic [OPB_W-1:0]   opbuf,
  input  logic [3:0]         offset,
  input  logic [WID_W-1:0]   width,
  output logic [AGG_W-1:0]   operand,  // shifted and masked attribute value
  output logic [AGG_W-1:0]   result
);

  logic [OPB_W-1:0] shifted;
  logic [AGG_W-1:0] mask;

  always_comb begin
    shifted = opbuf >> offset;
    if (width >= WID_W'(AGG_W)) mask = '1;
    else                        mask = (AGG_W'(1) << width) - AGG_W'(1);
    operand = shifted[AGG_W-1:0] & mask;
    unique case (fn)
      AGG_SUM: result = acc + operand;
      AGG_MIN: result = (operand < acc) ? operand : acc;
      AGG_MAX: result = (operand > acc) ? operand : acc;
      default: result = acc;
    endcase
  end

endmodule
