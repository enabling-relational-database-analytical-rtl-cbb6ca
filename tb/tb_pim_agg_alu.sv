// tb_pim_agg_alu: random test of SUM / MIN / MAX with shifting and masking
// against a reference computed bit by bit in the testbench.
module tb_pim_agg_alu;
  import pim_pkg::*;
  agg_fn_e fn; logic [AGG_W-1:0] acc, operand, result; logic [OPB_W-1:0] opbuf;
  logic [3:0] offset; logic [WID_W-1:0] width;
  int checks = 0, failures = 0;
  logic [AGG_W-1:0] e_op, e_res;

  pim_agg_alu dut (.*);

  initial begin
    for (int i = 0; i < 3000; i++) begin
      fn = agg_fn_e'($urandom_range(0, 2));
      acc = {$urandom, $urandom};
      opbuf = {$urandom, $urandom, $urandom};
      offset = 4'($urandom); width = WID_W'($urandom_range(1, 64));
      e_op = '0;
      for (int bi = 0; bi < int'(width); bi++) e_op[bi] = opbuf[int'(offset) + bi];
      case (fn)
        AGG_SUM: e_res = acc + e_op;
        AGG_MIN: e_res = (e_op < acc) ? e_op : acc;
        default: e_res = (e_op > acc) ? e_op : acc;
      endcase
      #1;
      checks++;
      if (operand !== e_op || result !== e_res) begin
        failures++;
        if (failures < 5) $display("FAIL fn=%0d off=%0d w=%0d op=%h/%h res=%h/%h",
                                    fn, offset, width, operand, e_op, result, e_res);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
