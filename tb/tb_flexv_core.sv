// tb_flexv_core: one Flex-V core with a testbench instruction ROM and a TCDM
// model (one-cycle read latency).
//  1. a8w4 4x4 Mac&Load MatMul block (the published kernel shape), memory
//     always granting: results must match a reference and the run must take
//     exactly one cycle per instruction (Mac&Load throughput 1/cycle).
//  2. the same with random grant refusals (bank conflicts): same results.
//  3. a8w2 and a4w2 blocks (4x weight reuse and 4-bit lanes).
//  4. a scalar program: legacy sdotp .b/.h, CSR read-back, branch loop, LUI,
//     SUB, load-use forwarding.
module tb_flexv_core;
  import flexv_pkg::*;
  import flexv_asm_pkg::*;
  logic clk = 0, rst_n = 0, fetch_en = 0, breq, halted, gnt_rand = 0, gnt_ok = 1;
  logic [31:0] iaddr, irdata; tcdm_req_t dreq; logic dgnt; tcdm_rsp_t drsp; core_evt_t evt;
  logic [31:0] imem [1024]; logic [31:0] dmem [4096];
  logic [31:0] prog[$];
  int checks = 0, failures = 0, stalls = 0, fwds = 0, switches = 0, rollbacks = 0, jumps = 0;
  localparam int TBL = 0, ABASE = 32'h400, WBASE = 32'h800, OBASE = 32'hC00;

  flexv_core #(.HART_ID(0)) dut (.clk_i(clk), .rst_ni(rst_n), .fetch_en_i(fetch_en), .boot_addr_i(32'h0),
    .clk_en_i(1'b1), .instr_addr_o(iaddr), .instr_rdata_i(irdata), .data_req_o(dreq), .data_gnt_i(dgnt), .data_rsp_i(drsp),
    .barrier_req_o(breq), .barrier_go_i(breq), .halted_o(halted), .evt_o(evt));

  always #5 clk = ~clk;
  assign irdata = imem[iaddr[11:2]];
  assign dgnt = dreq.req && gnt_ok;
  always @(posedge clk) begin
    gnt_ok <= gnt_rand ? 1'($urandom_range(0, 2) != 0) : 1'b1;
    drsp.rvalid <= dgnt && !dreq.we;
    drsp.rdata  <= dmem[dreq.addr[13:2]];
    if (dgnt && dreq.we) dmem[dreq.addr[13:2]] <= dreq.wdata;
    stalls += int'(evt.mem_stall); fwds += int'(evt.fwd); switches += int'(evt.mpc_switch);
    rollbacks += int'(evt.mlc_rollback); jumps += int'(evt.hwloop_jump);
  end

  task automatic chk(logic c, string m); checks++; if (!c) begin failures++; $display("FAIL %s", m); end endtask

  task automatic run(output int cycles);
    rst_n = 0; fetch_en = 0; repeat (2) @(posedge clk); #1 rst_n = 1;
    @(negedge clk); fetch_en = 1; cycles = 0;
    while (!halted && cycles < 20000) begin @(negedge clk); cycles++; end
    fetch_en = 0;
  endtask

  // one 4x4 block of a MatMul with K channels in format f
  task automatic matmul(simd_fmt_e f, int k, bit check_cycles);
    int aw, bw, n, cyc, acc; logic [31:0] aval [4][64]; logic [31:0] wval [4][64];
    fmt_widths(f, aw, bw);
    for (int i = 0; i < 4096; i++) dmem[i] = 0;
    dmem[0] = ABASE; dmem[1] = WBASE; dmem[2] = OBASE;
    for (int p = 0; p < 4; p++) for (int c = 0; c < k; c++) begin
      aval[p][c] = $urandom_range(0, (1 << aw) - 1);
      dmem[(ABASE + p * (k * aw / 8)) / 4 + c * aw / 32] |= aval[p][c] << ((c * aw) % 32);
    end
    for (int q = 0; q < 4; q++) for (int c = 0; c < k; c++) begin
      wval[q][c] = $urandom_range(0, (1 << bw) - 1);
      dmem[(WBASE + q * (k * bw / 8)) / 4 + c * bw / 32] |= wval[q][c] << ((c * bw) % 32);
    end
    n = gen_matmul(prog, f, k, 16, 0, TBL);
    foreach (prog[i]) imem[i] = prog[i];
    run(cyc);
    chk(halted, $sformatf("fmt %0d halted", f));
    for (int p = 0; p < 4; p++) for (int q = 0; q < 4; q++) begin
      acc = 0;
      for (int c = 0; c < k; c++) acc += int'(aval[p][c]) * elem(wval[q][c], bw, 0, 1);
      chk(dmem[(OBASE + p * 16 + q * 4) / 4] == 32'(acc),
          $sformatf("fmt %0d out[%0d][%0d] got %0d exp %0d", f, p, q, $signed(dmem[(OBASE + p * 16 + q * 4) / 4]), acc));
    end
    // one cycle to latch fetch enable, then one instruction per cycle
    if (check_cycles) chk(cyc == n + 1, $sformatf("cycles %0d expected %0d (one per instruction)", cyc, n + 1));
    $display("fmt %0d K=%0d: %0d instructions, %0d cycles", f, k, n, cyc);
  endtask

  initial begin
    int cyc;
    for (int i = 0; i < 1024; i++) imem[i] = 32'h0010_0073;
    matmul(FMT_MIX8x4, 32, 1);
    gnt_rand = 1;
    matmul(FMT_MIX8x4, 64, 0);
    gnt_rand = 0;
    matmul(FMT_MIX8x2, 64, 1);
    matmul(FMT_MIX4x2, 64, 1);
    matmul(FMT_8, 32, 1);
    // scalar / legacy program
    prog.delete();
    prog.push_back(csrrwi(0, CSR_SB_LEGACY, 1));
    prog.push_back(lui(1, 20'h01020));          // x1 = 0x01020000
    prog.push_back(addi(1, 1, 12'h304));        // x1 = 0x01020304
    prog.push_back(addi(2, 0, -1));             // x2 = 0xffffffff
    prog.push_back(addi(3, 0, 5));
    prog.push_back(sdotp(3, 1, 2, 0, 1'b1));    // .b sp: 5 - (1+2+3+4) = -5
    prog.push_back(addi(4, 0, 0));
    prog.push_back(sdotp(4, 1, 2, 0, 1'b0));    // .h sp: -(0x0304) - (0x0102) = -1030
    prog.push_back(csrrs(5, CSR_SB_LEGACY, 0)); // read back 1
    prog.push_back(addi(6, 0, 10));             // loop counter
    prog.push_back(addi(7, 0, 0));
    prog.push_back(addi(7, 7, 3));              // loop: x7 += 3
    prog.push_back(addi(6, 6, -1));
    prog.push_back(bne(6, 0, -8));
    prog.push_back(sub(8, 7, 3));               // 30 - (-5) = 35
    prog.push_back(sw(8, 0, 64));
    prog.push_back(lw(9, 0, 64));
    prog.push_back(addi(9, 9, 1));              // load-use: 36
    prog.push_back(csrrs(10, CSR_MHARTID, 0));
    prog.push_back(ebreak());
    for (int i = 0; i < 1024; i++) imem[i] = 32'h0010_0073;
    foreach (prog[i]) imem[i] = prog[i];
    run(cyc);
    chk(dut.gpr_q[3] == -32'sd5, $sformatf("sdotp.b got %0d", $signed(dut.gpr_q[3])));
    chk(dut.gpr_q[4] == -32'sd1030, $sformatf("sdotp.h got %0d", $signed(dut.gpr_q[4])));
    chk(dut.gpr_q[5] == 1, "csr read");
    chk(dut.gpr_q[7] == 30, "branch loop");
    chk(dut.gpr_q[9] == 36, "load-use forwarding");
    chk(dut.gpr_q[10] == 0, "mhartid");
    chk(cyc == 1 + 10 + 3 * 10 + 7, $sformatf("scalar cycles %0d", cyc));
    chk(stalls > 0 && fwds > 0 && switches > 0 && rollbacks > 0 && jumps > 0,
        $sformatf("mechanisms: stalls %0d fwd %0d switches %0d rollbacks %0d jumps %0d", stalls, fwds, switches, rollbacks, jumps));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
