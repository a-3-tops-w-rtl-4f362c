// tb_dotp_unit: random operands in every format, slice and signedness,
// compared with an independent lane-by-lane reference sum.
module tb_dotp_unit;
  import flexv_pkg::*;
  import flexv_asm_pkg::*;
  logic [31:0] a, b, c, res; simd_fmt_e fmt; logic [1:0] cnt; logic as, bs;
  int checks = 0, failures = 0;
  dotp_unit dut (.op_a_i(a), .op_b_i(b), .op_c_i(c), .fmt_i(fmt), .mpc_cnt_i(cnt),
                 .a_signed_i(as), .b_signed_i(bs), .en_i(1'b1), .result_o(res));
  simd_fmt_e fmts[7] = '{FMT_16, FMT_8, FMT_4, FMT_2, FMT_MIX8x4, FMT_MIX8x2, FMT_MIX4x2};
  initial begin
    // fixed example: a8w4, A = {4,3,2,1}, B = 8 x 4-bit {-1..}, slice 1
    fmt = FMT_MIX8x4; a = 32'h04030201; b = 32'hF2_1F_0000; c = 32'd100; cnt = 2'd1; as = 1'b1; bs = 1'b1;
    #1; checks++;
    // slice 1 = elements 4..7 = F,1,2,F(hi nibble order: b[19:16]=F,b[23:20]=1,b[27:24]=2,b[31:28]=F)
    // 1*(-1) + 2*1 + 3*2 + 4*(-1) = 3 -> 103
    if (res !== 32'd103) begin failures++; $display("FAIL fixed: %0d", res); end
    for (int it = 0; it < 2000; it++) begin
      int aw, bw, r; logic [31:0] exp;
      fmt = fmts[it % 7]; fmt_widths(fmt, aw, bw); r = aw / bw;
      a = $urandom; b = $urandom; c = $urandom; as = 1'($urandom); bs = 1'($urandom);
      cnt = 2'($urandom_range(0, r - 1));
      #1;
      exp = ref_dotp(a, b, c, aw, bw, int'(cnt), as, bs);
      checks++;
      if (res !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL fmt=%0d cnt=%0d a=%h b=%h c=%h s=%b%b got %h exp %h", fmt, cnt, a, b, c, as, bs, res, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
