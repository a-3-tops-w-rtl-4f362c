// tb_flexv_cluster: end-to-end test of the cluster at its default size
// (8 cores, 16 banks, 128 kB TCDM).
//
// For each of the six operand formats of the MatMul benchmark (a2w2, a4w2,
// a4w4, a8w2, a8w4, a8w8) it: fills an L2 model with a table of block
// descriptors, im2col-ordered activations (P pixels x K channels, unsigned)
// and filters (F x K, signed); moves them into the TCDM with the DMA; starts
// all cores on the 4x4 Mac&Load MatMul kernel (each core takes its share of
// 4-pixel x 4-filter blocks); waits for the barrier and EBREAK; moves the
// 32-bit results back with the DMA and compares them with a reference
// computed here. Every im2col row and filter row is padded by PAD bytes,
// so that rows (and the 4-pixel groups of different cores) start in
// different TCDM banks. K = 288 is the depth of the benchmark's 3x3x32 filters and
// F = 64 its filter count; P = 16 output pixels are computed per run.
// Counts how often each mechanism occurred (bank-conflict stalls, barrier
// clock gating, MPC slice switches, MLC rollbacks, hardware-loop jumps, load
// forwarding, DMA in/out) and fails if one never did. Checks the cluster's
// MAC/cycle against the published rate of each MatMul format (>= 90%).
module tb_flexv_cluster;
  import flexv_pkg::*;
  import flexv_asm_pkg::*;
  localparam int NC = 8, P = 16, F = 64, K = 288;
  localparam int NBLK_LOG2 = 3;                      // (P/4)*(F/4) / NC = 8 blocks per core
  localparam int TBL = 32'h0, ABASE = 32'h400, WBASE = 32'h2000, OBASE = 32'h8000, OUT_L2 = 32'h20000;
  localparam int PAD = 4;                           // bytes added to every im2col / filter row
  localparam int IN_WORDS = WBASE / 4 + F * (K / 4 + PAD) + 16;

  logic clk = 0, rst_n = 0, fetch_en = 0;
  logic [31:0] iaddr [NC]; logic [31:0] irdata [NC];
  logic dma_start = 0, dma_dir = 0, dma_busy, dma_done, brel;
  logic [31:0] dma_ext = 0, dma_tcdm = 0; logic [15:0] dma_len = 0;
  tcdm_req_t l2req; logic l2gnt; tcdm_rsp_t l2rsp;
  logic [NC-1:0] halted, clk_en; core_evt_t evt [NC];
  logic [31:0] imem [1024];
  logic [31:0] prog[$];
  int checks = 0, failures = 0;
  int n_stall = 0, n_gate = 0, n_switch = 0, n_rb = 0, n_jump = 0, n_fwd = 0, n_rel = 0, n_dma = 0, n_ml = 0;

  flexv_cluster dut (
    .clk_i(clk), .rst_ni(rst_n), .fetch_en_i(fetch_en), .boot_addr_i(32'h0),
    .instr_addr_o(iaddr), .instr_rdata_i(irdata),
    .dma_start_i(dma_start), .dma_dir_i(dma_dir), .dma_ext_addr_i(dma_ext), .dma_tcdm_addr_i(dma_tcdm),
    .dma_len_i(dma_len), .dma_busy_o(dma_busy), .dma_done_o(dma_done),
    .l2_req_o(l2req), .l2_gnt_i(l2gnt), .l2_rsp_i(l2rsp), .halted_o(halted), .core_clk_en_o(clk_en),
    .barrier_release_o(brel), .core_evt_o(evt));

  l2_model #(.WORDS(65536), .LAT(2), .RANDOM_GNT(1'b1)) u_l2 (.clk_i(clk), .req_i(l2req), .gnt_o(l2gnt), .rsp_o(l2rsp));

  always #5 clk = ~clk;
  for (genvar c = 0; c < NC; c++) begin : g_ifetch
    assign irdata[c] = imem[iaddr[c][11:2]];
  end
  always @(posedge clk) begin
    for (int c = 0; c < NC; c++) begin
      n_stall += int'(evt[c].mem_stall); n_switch += int'(evt[c].mpc_switch);
      n_rb += int'(evt[c].mlc_rollback); n_jump += int'(evt[c].hwloop_jump);
      n_fwd += int'(evt[c].fwd); n_ml += int'(evt[c].macload);
      n_gate += int'(fetch_en && !halted[c] && !clk_en[c]);
    end
    n_rel += int'(brel);
  end

  task automatic chk(logic c, string m); checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL %s", m); end endtask

  task automatic dma(logic dir, int ext, int tcdm, int len);
    @(negedge clk); dma_dir = dir; dma_ext = 32'(ext); dma_tcdm = 32'(tcdm); dma_len = 16'(len); dma_start = 1;
    @(negedge clk); dma_start = 0;
    while (!dma_done) @(negedge clk);
    n_dma++;
  endtask

  task automatic run_format(simd_fmt_e f, string name, real pub);
    int aw, bw, a_row, w_row, cyc, acc, n_instr;
    logic [31:0] av [P][K]; logic [31:0] wv [F][K];
    fmt_widths(f, aw, bw);
    a_row = K * aw / 8 + PAD; w_row = K * bw / 8 + PAD;
    for (int i = 0; i < IN_WORDS; i++) u_l2.mem[i] = 0;
    for (int g = 0; g < NC << NBLK_LOG2; g++) begin
      int pg, fg;
      pg = g / (F / 4); fg = g % (F / 4);
      u_l2.mem[g * 4 + 0] = 32'(ABASE + pg * 4 * a_row);
      u_l2.mem[g * 4 + 1] = 32'(WBASE + fg * 4 * w_row);
      u_l2.mem[g * 4 + 2] = 32'(OBASE + pg * 4 * F * 4 + fg * 16);
    end
    for (int p = 0; p < P; p++) for (int c = 0; c < K; c++) begin
      av[p][c] = $urandom_range(0, (1 << aw) - 1);
      u_l2.mem[(ABASE + p * a_row) / 4 + c * aw / 32] |= av[p][c] << ((c * aw) % 32);
    end
    for (int q = 0; q < F; q++) for (int c = 0; c < K; c++) begin
      wv[q][c] = $urandom_range(0, (1 << bw) - 1);
      u_l2.mem[(WBASE + q * w_row) / 4 + c * bw / 32] |= wv[q][c] << ((c * bw) % 32);
    end
    n_instr = gen_matmul(prog, f, K, F * 4, NBLK_LOG2, TBL, PAD);
    for (int i = 0; i < 1024; i++) imem[i] = 32'h0010_0073;
    foreach (prog[i]) imem[i] = prog[i];
    rst_n = 0; fetch_en = 0; repeat (2) @(posedge clk); #1 rst_n = 1;
    dma(0, 0, 0, IN_WORDS);
    @(negedge clk); fetch_en = 1; cyc = 0;
    while (halted != '1 && cyc < 400000) begin @(negedge clk); cyc++; end
    chk(halted == '1, $sformatf("%s: all cores halted", name));
    fetch_en = 0;
    dma(1, OUT_L2, OBASE, P * F);
    for (int p = 0; p < P; p++) for (int q = 0; q < F; q++) begin
      acc = 0;
      for (int c = 0; c < K; c++) acc += int'(av[p][c]) * elem(wv[q][c], bw, 0, 1);
      chk(u_l2.mem[OUT_L2 / 4 + p * F + q] == 32'(acc),
          $sformatf("%s out[%0d][%0d] got %0d exp %0d", name, p, q, $signed(u_l2.mem[OUT_L2 / 4 + p * F + q]), acc));
    end
    // at least half of the ideal Mac&Load rate: every core does 32/aw MACs per cycle
    chk(real'(P * F * K) / cyc > 0.5 * NC * (32 / aw) * real'(16 * aw / bw) / (1 + 16 * aw / bw) * 0.5,
        $sformatf("%s throughput", name));
    // and at least 90% of the published cluster rate for this MatMul format
    chk(real'(P * F * K) / cyc >= 0.9 * pub, $sformatf("%s: below 90%% of %0.1f MAC/cycle", name, pub));
    $display("%s: %0d cycles, %0.2f MAC/cycle (published %0.1f; %0d instructions per core)", name, cyc, real'(P * F * K) / cyc, pub, n_instr);
  endtask

  initial begin
    for (int i = 0; i < 1024; i++) imem[i] = 32'h0010_0073;
    run_format(FMT_2,      "a2w2", 91.5);
    run_format(FMT_MIX4x2, "a4w2", 51.9);
    run_format(FMT_4,      "a4w4", 50.6);
    run_format(FMT_MIX8x2, "a8w2", 27.8);
    run_format(FMT_MIX8x4, "a8w4", 27.6);
    run_format(FMT_8,      "a8w8", 26.9);
    $display("events: conflict stalls %0d, gated core-cycles %0d, barrier releases %0d, MPC switches %0d, MLC rollbacks %0d, hw-loop jumps %0d, forwards %0d, Mac&Loads %0d, DMA transfers %0d",
             n_stall, n_gate, n_rel, n_switch, n_rb, n_jump, n_fwd, n_ml, n_dma);
    chk(n_stall > 0, "bank conflict never happened");
    chk(n_gate > 0, "barrier clock gating never happened");
    chk(n_rel == 6, "one barrier release per run");
    chk(n_switch > 0, "MPC switch never happened");
    chk(n_rb > 0, "MLC rollback never happened");
    chk(n_jump > 0, "hardware loop never jumped");
    chk(n_fwd > 0, "forwarding never happened");
    chk(n_dma == 12, "DMA in and out per run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
