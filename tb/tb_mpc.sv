// tb_mpc: MPC_CNT must advance every mix_skip counted steps, wrap at the
// format's reuse ratio, ignore cycles without a step, restart on clear and
// stay 0 in uniform formats.
module tb_mpc;
  import flexv_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, step = 0, sw;
  simd_fmt_e fmt; logic [15:0] skip; logic [1:0] cnt;
  int checks = 0, failures = 0, n_sw = 0;
  mpc dut (.clk_i(clk), .rst_ni(rst_n), .fmt_i(fmt), .mix_skip_i(skip), .clear_i(clear),
           .step_i(step), .mpc_cnt_o(cnt), .switch_o(sw));
  always #5 clk = ~clk;
  task automatic run(simd_fmt_e f, int s, int ratio, int nsteps);
    int model_cnt = 0, model_slice = 0;
    fmt = f; skip = 16'(s); clear = 1; @(posedge clk); #1; clear = 0;
    for (int i = 0; i < nsteps; i++) begin
      step = 1'($urandom);
      checks++;
      if (cnt !== 2'(model_slice)) begin failures++; $display("FAIL fmt=%0d i=%0d got %0d exp %0d", f, i, cnt, model_slice); end
      @(posedge clk); #1;
      if (step) begin
        model_cnt++;
        if (model_cnt == s) begin model_cnt = 0; model_slice = (model_slice + 1) % ratio; end
      end
    end
    step = 0;
  endtask
  always @(posedge clk) if (sw) n_sw++;
  initial begin
    fmt = FMT_MIX8x4; skip = 16;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    run(FMT_MIX8x4, 16, 2, 200);
    run(FMT_MIX8x2, 3, 4, 200);
    run(FMT_MIX4x2, 1, 2, 50);
    run(FMT_8, 4, 1, 50);
    checks++; if (n_sw == 0) begin failures++; $display("FAIL no switch seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
