// tb_pim_agg_circuit: drives the aggregation circuit as a PIM controller
// would (clear, then per record a select read and 1..5 attribute reads) and
// compares the register with an aggregate of the selected records computed
// in the testbench. Unselected records must not change the result.
module tb_pim_agg_circuit;
  import pim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  agg_ctl_e ctl; agg_fn_e fn; logic [3:0] sel_bit, offset; logic [WID_W-1:0] width;
  logic [2:0] rd_idx; logic [RD_W-1:0] rdata; logic [AGG_W-1:0] result;
  int checks = 0, failures = 0;

  pim_agg_circuit dut (.*);

  task automatic cyc(agg_ctl_e c, logic [RD_W-1:0] d, logic [2:0] idx);
    ctl = c; rdata = d; rd_idx = idx; @(posedge clk); #1; ctl = AC_NONE;
  endtask

  initial begin
    ctl = AC_NONE; fn = AGG_SUM; sel_bit = 0; offset = 0; width = 16; rd_idx = 0; rdata = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      logic [AGG_W-1:0] expv, v; logic [OPB_W-1:0] buf_v; int nrd, nsel;
      fn = agg_fn_e'($urandom_range(0, 2));
      offset = 4'($urandom); width = WID_W'($urandom_range(1, 64));
      sel_bit = 4'($urandom);
      nrd = (int'(offset) + int'(width) - 1) / 16 + 1;
      expv = agg_identity(fn); nsel = 0;
      cyc(AC_CLEAR, '0, 0);
      for (int r = 0; r < 20; r++) begin
        logic s; logic [RD_W-1:0] sw;
        s = ($urandom_range(0, 1) == 1);
        sw = RD_W'($urandom); sw[sel_bit] = s;
        buf_v = {$urandom, $urandom, $urandom};
        cyc(AC_SEL, sw, 0);
        for (int k = 0; k < nrd; k++)
          cyc((k == nrd-1) ? AC_LAST : AC_SHIFT, buf_v[k*16 +: 16], 3'(k));
        v = '0;
        for (int bi = 0; bi < int'(width); bi++) v[bi] = buf_v[int'(offset) + bi];
        if (s) begin
          nsel++;
          case (fn)
            AGG_SUM: expv = expv + v;
            AGG_MIN: expv = (v < expv) ? v : expv;
            default: expv = (v > expv) ? v : expv;
          endcase
        end
      end
      checks++;
      if (result !== expv) begin
        failures++;
        $display("FAIL t=%0d fn=%0d w=%0d off=%0d sel=%0d got %h exp %h", t, fn, width, offset, nsel, result, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
