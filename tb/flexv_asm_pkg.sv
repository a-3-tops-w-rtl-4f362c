// flexv_asm_pkg: instruction encoders for the testbenches (a tiny assembler).
//
// Standard RV32I encodings for the scalar subset and the cluster's own
// encodings for sdotp / mlsdotp / lp.setup (see rtl/flexv_decoder.sv).
package flexv_asm_pkg;
  import flexv_pkg::*;

  function automatic logic [31:0] i_type(logic [6:0] opc, logic [2:0] f3, int rd, int rs1, int imm);
    return {12'(imm), 5'(rs1), f3, 5'(rd), opc};
  endfunction
  function automatic logic [31:0] addi(int rd, int rs1, int imm); return i_type(OPC_OPIMM, 3'b000, rd, rs1, imm); endfunction
  function automatic logic [31:0] slli(int rd, int rs1, int sh);  return i_type(OPC_OPIMM, 3'b001, rd, rs1, sh & 31); endfunction
  function automatic logic [31:0] lw(int rd, int rs1, int imm);   return i_type(OPC_LOAD, 3'b010, rd, rs1, imm); endfunction
  function automatic logic [31:0] lui(int rd, int imm20);         return {20'(imm20), 5'(rd), OPC_LUI}; endfunction
  function automatic logic [31:0] add(int rd, int rs1, int rs2);  return {7'd0, 5'(rs2), 5'(rs1), 3'b000, 5'(rd), OPC_OP}; endfunction
  function automatic logic [31:0] sub(int rd, int rs1, int rs2);  return {7'b0100000, 5'(rs2), 5'(rs1), 3'b000, 5'(rd), OPC_OP}; endfunction
  function automatic logic [31:0] sw(int rs2, int rs1, int imm);
    logic [11:0] i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'b010, i[4:0], OPC_STORE};
  endfunction
  function automatic logic [31:0] branch(logic [2:0] f3, int rs1, int rs2, int off);
    logic [12:0] i = 13'(off);
    return {i[12], i[10:5], 5'(rs2), 5'(rs1), f3, i[4:1], i[11], OPC_BRANCH};
  endfunction
  function automatic logic [31:0] bne(int rs1, int rs2, int off); return branch(3'b001, rs1, rs2, off); endfunction
  function automatic logic [31:0] beq(int rs1, int rs2, int off); return branch(3'b000, rs1, rs2, off); endfunction
  function automatic logic [31:0] csrrw(int rd, logic [11:0] csr, int rs1)  ; return {csr, 5'(rs1), 3'b001, 5'(rd), OPC_SYSTEM}; endfunction
  function automatic logic [31:0] csrrs(int rd, logic [11:0] csr, int rs1)  ; return {csr, 5'(rs1), 3'b010, 5'(rd), OPC_SYSTEM}; endfunction
  function automatic logic [31:0] csrrwi(int rd, logic [11:0] csr, int zimm); return {csr, 5'(zimm), 3'b101, 5'(rd), OPC_SYSTEM}; endfunction
  function automatic logic [31:0] wfi();    return 32'h1050_0073; endfunction
  function automatic logic [31:0] ebreak(); return 32'h0010_0073; endfunction
  // sdotp rd += dot(rs1, rs2); sign: 0 sp, 1 usp, 2 up; b = .b suffix
  function automatic logic [31:0] sdotp(int rd, int rs1, int rs2, int sign, bit b = 1'b0);
    return {6'd0, b, 5'(rs2), 5'(rs1), 1'b0, 2'(sign), 5'(rd), OPC_DOTP};
  endfunction
  // mlsdotp rd, ax|aw, imm5 (imm5 exactly as in the kernel listing)
  function automatic logic [31:0] mlsdotp(int rd, int imm5, int sign, bit b = 1'b0);
    bit ax = imm5[3];
    return {6'd0, b, 5'(imm5), 5'(ax), 1'b1, 2'(sign), 5'(rd), OPC_DOTP};
  endfunction
  // lp.setup: count in rs1, body = next instruction .. lp.setup + end_off
  function automatic logic [31:0] lp_setup(int rs1, int end_off);
    return {12'(end_off), 5'(rs1), 3'b000, 5'd0, OPC_HWLOOP};
  endfunction

  // -------- reference arithmetic for dotps ---------------------------------
  function automatic int elem(logic [31:0] w, int width, int idx, bit sgn);
    logic [31:0] v = (w >> (width * idx)) & ((32'd1 << width) - 1);
    if (sgn && v[width-1]) return int'(v) - (1 << width);
    return int'(v);
  endfunction

  // Reference model of the dotp unit: a_w / b_w = element widths.
  function automatic logic [31:0] ref_dotp(logic [31:0] a, logic [31:0] b, logic [31:0] c,
                                           int a_w, int b_w, int slice, bit as, bit bs);
    int n = 32 / a_w;
    int acc = int'(c);
    for (int i = 0; i < n; i++)
      acc += elem(a, a_w, i, as) * elem(b, b_w, slice * n + i, bs);
    return 32'(acc);
  endfunction

  // Element widths of a format code.
  function automatic void fmt_widths(simd_fmt_e f, output int a_w, output int b_w);
    case (f)
      FMT_16: begin a_w = 16; b_w = 16; end
      FMT_8:  begin a_w = 8;  b_w = 8;  end
      FMT_4:  begin a_w = 4;  b_w = 4;  end
      FMT_2:  begin a_w = 2;  b_w = 2;  end
      FMT_MIX8x4: begin a_w = 8; b_w = 4; end
      FMT_MIX8x2: begin a_w = 8; b_w = 2; end
      default:    begin a_w = 4; b_w = 2; end
    endcase
  endfunction

  // -------- MatMul kernel generator ----------------------------------------
  // Builds the 4x4-unrolled Mac&Load MatMul of the published 8x4 kernel,
  // generalised to every format: 4 pixels x 4 filters per block, 16
  // accumulators x10..x25, activations double-buffered in a0/a1, weights in
  // w0..w3 reloaded once per inner iteration, one explicit activation load
  // at the loop head. The per-(core, block) table at byte address tbl holds
  // {a_base, w_base, out_base, 0}; each core runs 2**nblk_log2 blocks.
  // Rows of activations and of weights are k*width/8 + row_pad bytes apart.
  // Returns the number of instructions one core executes.
  function automatic int gen_matmul(ref logic [31:0] prog[$], input simd_fmt_e fmt, input int k,
                                    input int out_row, input int nblk_log2, input int tbl,
                                    input int row_pad = 0);
    int a_w, b_w, r, n_w, iters, a_str, w_str, blk_pc, body, n_pro, n_blk;
    fmt_widths(fmt, a_w, b_w);
    r = a_w / b_w; n_w = 32 / b_w; iters = k / n_w;
    a_str = k * a_w / 8 + row_pad; w_str = k * b_w / 8 + row_pad;
    body = 1 + 16 * r;
    prog.delete();
    prog.push_back(csrrs(5, CSR_MHARTID, 0));
    prog.push_back(slli(5, 5, nblk_log2 + 4));
    prog.push_back(addi(5, 5, tbl));
    prog.push_back(addi(29, 0, 1 << nblk_log2));
    prog.push_back(csrrwi(0, CSR_SB_LEGACY, 0));
    prog.push_back(csrrwi(0, CSR_SIMD_FMT, int'(fmt)));
    prog.push_back(csrrwi(0, CSR_MIX_SKIP, 16));
    prog.push_back(addi(28, 0, a_str));          prog.push_back(csrrw(0, CSR_A_STRIDE, 28));
    prog.push_back(addi(28, 0, w_str));          prog.push_back(csrrw(0, CSR_W_STRIDE, 28));
    prog.push_back(addi(28, 0, 4 - 3 * a_str));  prog.push_back(csrrw(0, CSR_A_ROLLBACK, 28));
    prog.push_back(addi(28, 0, 4 - 3 * w_str));  prog.push_back(csrrw(0, CSR_W_ROLLBACK, 28));
    prog.push_back(csrrwi(0, CSR_A_SKIP, 4));
    prog.push_back(csrrwi(0, CSR_W_SKIP, 4));
    prog.push_back(addi(9, 0, iters));
    n_pro = prog.size();
    blk_pc = prog.size();
    prog.push_back(lw(6, 5, 0));
    prog.push_back(lw(7, 5, 4));
    prog.push_back(lw(8, 5, 8));
    prog.push_back(csrrw(0, CSR_A_ADDR, 6));
    prog.push_back(csrrw(0, CSR_W_ADDR, 7));
    for (int i = 0; i < 16; i++) prog.push_back(addi(10 + i, 0, 0));
    for (int f = 0; f < 4; f++) prog.push_back(mlsdotp(0, 16 + 2 * f, 0));   // init the NN-RF
    prog.push_back(mlsdotp(0, 8, 0));
    prog.push_back(lp_setup(9, 4 * body));
    prog.push_back(mlsdotp(0, 9, 0));                                        // explicit load
    for (int h = 0; h < r; h++)
      for (int p = 0; p < 4; p++)
        for (int f = 0; f < 4; f++) begin
          int imm;
          imm = (p % 2) | (f << 1);
          if (h == r - 1 && p == 3) imm |= 16;       // reload weight f
          else if (f == 3)          imm |= 8;        // reload this activation register
          prog.push_back(mlsdotp(10 + p * 4 + f, imm, 1));
        end
    for (int p = 0; p < 4; p++)
      for (int f = 0; f < 4; f++) prog.push_back(sw(10 + p * 4 + f, 8, p * out_row + f * 4));
    prog.push_back(addi(5, 5, 16));
    prog.push_back(addi(29, 29, -1));
    prog.push_back(bne(29, 0, 4 * (blk_pc - prog.size())));
    prog.push_back(wfi());
    prog.push_back(ebreak());
    n_blk = prog.size() - 2 - n_pro - body;                 // per-block instructions outside the loop
    return n_pro + (1 << nblk_log2) * (n_blk + iters * body) + 2;
  endfunction
endpackage
