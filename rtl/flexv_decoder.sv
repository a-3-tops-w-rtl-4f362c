// flexv_decoder: instruction decoder of the Flex-V core.
//
// Scalar instructions are decoded completely from their encoding. A virtual
// SIMD instruction (sdotp, mlsdotp) is decoded only as far as its type: the
// decoder marks it virt_simd and the execute stage takes the operand format
// from the simd_fmt CSR and the weight slice from the MPC, so one opcode
// stands for every precision combination.
//
// Decoded set: the RV32I subset a MatMul kernel needs (LUI, ADDI, SLLI, ADD,
// SUB, LW, SW, BEQ, BNE, CSRRW, CSRRS, CSRRWI, WFI, EBREAK) with standard
// RISC-V encodings, plus three extension instructions whose encodings are
// this design's own (no encoding is published):
//   custom-1 (0x2B)  sdotp / mlsdotp
//     [31:26]=0, [25] .b suffix (1) / .h (0), funct3[14]=1 Mac&Load,
//     funct3[13:12] signedness 0 sp, 1 usp, 2 up, rd accumulator (read+write)
//     sdotp:   rs1 = A, rs2 ([24:20]) = B
//     mlsdotp: [24:20] = 5-bit Mac&Load immediate
//              imm[0] activation register a0/a1, imm[2:1] weight register
//              w0..w3, imm[3] reload that activation register, imm[4] reload
//              that weight register; [19:15] holds the assembler's ax/aw tag
//              (1/0), which repeats imm[3] and is not used.
//   custom-3 (0x7B)  lp.setup rs1 = iteration count, imm[31:20] = byte
//                    offset from lp.setup to the last instruction of the body
// Everything else decodes to OP_ILLEGAL. Combinational.
module flexv_decoder
  import flexv_pkg::*;
(
  input  logic [31:0] instr_i,
  output dec_t        dec_o
);

  logic [6:0] opcode;
  logic [2:0] funct3;
  logic [6:0] funct7;

  assign opcode = instr_i[6:0];
  assign funct3 = instr_i[14:12];
  assign funct7 = instr_i[31:25];

  always_comb begin
    dec_o          = '0;
    dec_o.op       = OP_ILLEGAL;
    dec_o.rd       = instr_i[11:7];
    dec_o.rs1      = instr_i[19:15];
    dec_o.rs2      = instr_i[24:20];
    dec_o.csr_addr = instr_i[31:20];
    dec_o.sign     = DOTP_SP;
    dec_o.csr_op   = CSR_RW;
    case (opcode)
      OPC_LUI: begin
        dec_o.op = OP_LUI; dec_o.imm = {instr_i[31:12], 12'd0}; dec_o.rd_we = 1'b1;
      end
      OPC_OPIMM: begin
        dec_o.imm = {{20{instr_i[31]}}, instr_i[31:20]};
        if (funct3 == 3'b000) begin
          dec_o.op = OP_ADDI; dec_o.rd_we = 1'b1;
        end else if (funct3 == 3'b001 && funct7 == 7'd0) begin
          dec_o.op = OP_SLLI; dec_o.rd_we = 1'b1;
        end
      end
      OPC_OP: begin
        if (funct3 == 3'b000 && funct7 == 7'd0) begin
          dec_o.op = OP_ADD; dec_o.rd_we = 1'b1;
        end else if (funct3 == 3'b000 && funct7 == 7'b0100000) begin
          dec_o.op = OP_SUB; dec_o.rd_we = 1'b1;
        end
      end
      OPC_LOAD: if (funct3 == 3'b010) begin
        dec_o.op = OP_LW; dec_o.imm = {{20{instr_i[31]}}, instr_i[31:20]}; dec_o.rd_we = 1'b1;
      end
      OPC_STORE: if (funct3 == 3'b010) begin
        dec_o.op = OP_SW; dec_o.imm = {{20{instr_i[31]}}, instr_i[31:25], instr_i[11:7]};
      end
      OPC_BRANCH: begin
        dec_o.imm = {{19{instr_i[31]}}, instr_i[31], instr_i[7], instr_i[30:25], instr_i[11:8], 1'b0};
        if (funct3 == 3'b000) dec_o.op = OP_BEQ;
        else if (funct3 == 3'b001) dec_o.op = OP_BNE;
      end
      OPC_SYSTEM: begin
        dec_o.imm = {27'd0, instr_i[19:15]};
        case (funct3)
          3'b000: begin
            if (instr_i == 32'h1050_0073) dec_o.op = OP_WFI;
            else if (instr_i == 32'h0010_0073) dec_o.op = OP_EBREAK;
          end
          3'b001: begin dec_o.op = OP_CSR; dec_o.csr_op = CSR_RW;  dec_o.rd_we = 1'b1; end
          3'b010: begin dec_o.op = OP_CSR; dec_o.csr_op = CSR_RS;  dec_o.rd_we = 1'b1; end
          3'b101: begin dec_o.op = OP_CSR; dec_o.csr_op = CSR_RWI; dec_o.rd_we = 1'b1; end
          default: ;
        endcase
      end
      OPC_DOTP: if (instr_i[31:26] == 6'd0 && funct3[1:0] != 2'b11) begin
        dec_o.virt_simd = 1'b1;
        dec_o.sign      = dotp_sign_e'(funct3[1:0]);
        dec_o.legacy_b  = instr_i[25];
        dec_o.rd_we     = 1'b1;
        if (funct3[2]) begin
          dec_o.op    = OP_MLSDOTP;
          dec_o.a_sel = instr_i[20];
          dec_o.w_sel = instr_i[22:21];
          dec_o.upd_a = instr_i[23];
          dec_o.upd_w = instr_i[24];
        end else begin
          dec_o.op    = OP_SDOTP;
        end
      end
      OPC_HWLOOP: if (funct3 == 3'b000) begin
        dec_o.op = OP_LPSETUP; dec_o.imm = {20'd0, instr_i[31:20]};
      end
      default: ;
    endcase
    if (dec_o.rd == 5'd0) dec_o.rd_we = 1'b0;
  end

endmodule
