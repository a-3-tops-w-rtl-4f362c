// tb_slicer_router: checks the slicer & router against an element-by-element
// reference for every format, slice index and signedness.
module tb_slicer_router;
  import flexv_pkg::*;
  import flexv_asm_pkg::*;
  logic [31:0] b, bo; simd_fmt_e fmt; logic [1:0] cnt; logic sgn; logic [3:0] sel;
  int checks = 0, failures = 0;
  slicer_router dut (.op_b_i(b), .fmt_i(fmt), .mpc_cnt_i(cnt), .b_signed_i(sgn), .op_b_o(bo), .unit_sel_o(sel));
  simd_fmt_e fmts[7] = '{FMT_16, FMT_8, FMT_4, FMT_2, FMT_MIX8x4, FMT_MIX8x2, FMT_MIX4x2};
  initial begin
    for (int it = 0; it < 300; it++) begin
      int aw, bw, n, r; logic [31:0] exp_b; logic [3:0] exp_sel;
      fmt = fmts[it % 7]; b = $urandom; sgn = 1'($urandom); fmt_widths(fmt, aw, bw);
      r = aw / bw; cnt = 2'($urandom_range(0, r - 1)); n = 32 / aw;
      #1;
      exp_b = '0;
      for (int i = 0; i < n; i++) exp_b |= (32'(elem(b, bw, 32'(cnt) * n + i, sgn)) & ((32'd1 << aw) - 1)) << (aw * i);
      if (aw == 16 && n == 2) exp_b = b;
      exp_sel = aw == 16 ? 4'b0001 : aw == 8 ? 4'b0010 : aw == 4 ? 4'b0100 : 4'b1000;
      checks++;
      if (bo !== exp_b || sel !== exp_sel) begin
        failures++;
        $display("FAIL fmt=%0d cnt=%0d b=%h got %h/%b exp %h/%b", fmt, cnt, b, bo, sel, exp_b, exp_sel);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
