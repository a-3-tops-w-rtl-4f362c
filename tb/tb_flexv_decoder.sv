// tb_flexv_decoder: encodes instructions with the testbench assembler and
// checks the decoded fields, including every Mac&Load immediate of the
// published 8x4 kernel listing.
module tb_flexv_decoder;
  import flexv_pkg::*;
  import flexv_asm_pkg::*;
  logic [31:0] instr; dec_t d;
  int checks = 0, failures = 0;
  flexv_decoder dut (.instr_i(instr), .dec_o(d));
  task automatic chk(logic c, string m); checks++; if (!c) begin failures++; $display("FAIL %s", m); end endtask
  int imms[14] = '{16, 18, 20, 22, 8, 9, 0, 2, 4, 14, 1, 3, 5, 15};
  initial begin
    instr = addi(5, 6, -7); #1; chk(d.op == OP_ADDI && d.rd == 5 && d.rs1 == 6 && d.imm == -32'sd7 && d.rd_we, "addi");
    instr = slli(7, 8, 4); #1;  chk(d.op == OP_SLLI && d.imm[4:0] == 4, "slli");
    instr = add(1, 2, 3); #1;   chk(d.op == OP_ADD && d.rs2 == 3, "add");
    instr = sub(1, 2, 3); #1;   chk(d.op == OP_SUB, "sub");
    instr = lui(9, 20'h12345); #1; chk(d.op == OP_LUI && d.imm == 32'h12345000, "lui");
    instr = lw(4, 5, 2044); #1; chk(d.op == OP_LW && d.imm == 2044, "lw");
    instr = sw(4, 5, -8); #1;   chk(d.op == OP_SW && d.imm == -32'sd8 && d.rs2 == 4 && !d.rd_we, "sw");
    instr = bne(4, 5, -16); #1; chk(d.op == OP_BNE && d.imm == -32'sd16, "bne");
    instr = beq(4, 5, 64); #1;  chk(d.op == OP_BEQ && d.imm == 64, "beq");
    instr = csrrwi(0, CSR_SIMD_FMT, 8); #1; chk(d.op == OP_CSR && d.csr_op == CSR_RWI && d.imm == 8 && d.csr_addr == CSR_SIMD_FMT && !d.rd_we, "csrrwi");
    instr = csrrs(5, CSR_MHARTID, 0); #1;  chk(d.op == OP_CSR && d.csr_op == CSR_RS && d.rd_we, "csrrs");
    instr = wfi(); #1;    chk(d.op == OP_WFI, "wfi");
    instr = ebreak(); #1; chk(d.op == OP_EBREAK, "ebreak");
    instr = lp_setup(9, 136); #1; chk(d.op == OP_LPSETUP && d.imm == 136 && d.rs1 == 9, "lp.setup");
    instr = sdotp(10, 11, 12, 1, 1'b1); #1; chk(d.op == OP_SDOTP && d.virt_simd && d.sign == DOTP_USP && d.legacy_b && d.rs1 == 11 && d.rs2 == 12, "sdotp");
    foreach (imms[i]) begin
      instr = mlsdotp(10, imms[i], 1); #1;
      chk(d.op == OP_MLSDOTP && d.virt_simd && d.a_sel == imms[i][0] && d.w_sel == 2'(imms[i] >> 1) &&
          d.upd_a == imms[i][3] && d.upd_w == imms[i][4], $sformatf("mlsdotp imm %0d", imms[i]));
    end
    instr = mlsdotp(0, 16, 0); #1; chk(!d.rd_we && d.op == OP_MLSDOTP, "mlsdotp zero");
    instr = 32'hFFFF_FFFF; #1; chk(d.op == OP_ILLEGAL, "illegal");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
