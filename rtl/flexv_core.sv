// flexv_core: a Flex-V processing element of the cluster.
//
// An in-order RV32 core that carries the mixed-precision extension: the
// virtual SIMD dotp (format from the simd_fmt CSR, weight slice from the MPC),
// the fused Mac&Load (a dotp on NN-RF operands that also loads the next
// activation or weight word into the NN-RF, at an address generated by the
// MLC), one hardware loop level and a WFI barrier.
//
// Pipeline: one instruction is fetched, decoded and executed per cycle
// (instr_rdata_i must hold the word at instr_addr_o in the same cycle). A
// load, plain or Mac&Load, is issued in its execute cycle and written back
// one cycle later, when the TCDM returns the data; the following instruction
// keeps running, and if it reads the register being loaded the returning data
// is forwarded to it. So a stream of Mac&Loads runs at one per cycle, doing
// a 4-, 8- or 16-lane dotp and a 32-bit load in each. The core stalls only
// when the interconnect does not grant its request (bank conflict), while a
// WFI waits for the barrier, or while its clock enable is low.
//
// Follows the published design: the Dotp unit, MPC, MLC, NN-RF and CSRs and
// the instruction semantics of the 8x4 MatMul kernel listing. This design's
// own: the single-stage pipeline (the published core is the four-stage RI5CY
// with the full RV32IMC + XpulpV2 ISA, which is not reproduced here), the
// instruction subset and encodings (see flexv_decoder), the hardware-loop
// encoding, halting on EBREAK or an illegal instruction, and the rule that
// only dotps with rd != x0 advance the MPC (load-only Mac&Loads write x0).
module flexv_core
  import flexv_pkg::*;
#(
  parameter logic [31:0] HART_ID = 32'd0
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        fetch_en_i,
  input  logic [31:0] boot_addr_i,
  input  logic        clk_en_i,      // from the synchronization unit
  output logic [31:0] instr_addr_o,
  input  logic [31:0] instr_rdata_i,
  output tcdm_req_t   data_req_o,
  input  logic        data_gnt_i,
  input  tcdm_rsp_t   data_rsp_i,
  output logic        barrier_req_o,
  input  logic        barrier_go_i,
  output logic        halted_o,
  output core_evt_t   evt_o
);

  // ---------------------------------------------------------------- state
  logic [31:0] pc_q;
  logic [31:0] gpr_q [32];
  logic        started_q, halted_q;
  logic [31:0] lp_start_q, lp_end_q, lp_cnt_q;
  logic        pend_q, pend_nn_q;
  logic [4:0]  pend_idx_q;

  dec_t        dec;
  logic        run, stall, adv;
  logic        wb;                      // load data returns this cycle
  logic [31:0] rs1_v, rs2_v, rd_v, nn_a_v, nn_w_v;
  logic        f_rs1, f_rs2, f_rd, f_a, f_w;
  logic [31:0] nn_a_raw, nn_w_raw;

  ext_cfg_t    cfg;
  logic [31:0] csr_rdata, csr_wdata, csr_old;
  logic        csr_valid, csr_we;
  logic        clear_mpc, clear_a, clear_w;
  logic [1:0]  mpc_cnt;
  logic        mpc_switch;
  simd_fmt_e   fmt_eff;
  logic [31:0] dotp_res;
  logic        a_signed, b_signed;
  logic        ml_load;
  logic [31:0] mlc_load_addr, mlc_upd_addr;
  logic        mlc_rollback;

  logic        mem_op;
  logic [31:0] alu_res, pc_next;
  logic        lp_jump;

  flexv_decoder u_dec (.instr_i(instr_rdata_i), .dec_o(dec));

  assign instr_addr_o = pc_q;
  assign run  = started_q && !halted_q && clk_en_i;
  assign wb   = pend_q && data_rsp_i.rvalid;

  // ------------------------------------------------- operands + forwarding
  assign f_rs1 = pend_q && !pend_nn_q && pend_idx_q == dec.rs1 && dec.rs1 != 5'd0;
  assign f_rs2 = pend_q && !pend_nn_q && pend_idx_q == dec.rs2 && dec.rs2 != 5'd0;
  assign f_rd  = pend_q && !pend_nn_q && pend_idx_q == dec.rd  && dec.rd  != 5'd0;
  assign f_a   = pend_q &&  pend_nn_q && pend_idx_q == 5'(4 + 32'(dec.a_sel));
  assign f_w   = pend_q &&  pend_nn_q && pend_idx_q == {3'd0, dec.w_sel};
  assign rs1_v  = f_rs1 ? data_rsp_i.rdata : gpr_q[dec.rs1];
  assign rs2_v  = f_rs2 ? data_rsp_i.rdata : gpr_q[dec.rs2];
  assign rd_v   = f_rd  ? data_rsp_i.rdata : gpr_q[dec.rd];
  assign nn_a_v = f_a   ? data_rsp_i.rdata : nn_a_raw;
  assign nn_w_v = f_w   ? data_rsp_i.rdata : nn_w_raw;

  nn_rf u_nn_rf (
    .clk_i, .rst_ni,
    .we_i     (wb && pend_nn_q),
    .waddr_i  (pend_idx_q[2:0]),
    .wdata_i  (data_rsp_i.rdata),
    .w_sel_i  (dec.w_sel),
    .a_sel_i  (dec.a_sel),
    .w_rdata_o(nn_w_raw),
    .a_rdata_o(nn_a_raw)
  );

  // --------------------------------------------------------------- CSRs
  always_comb begin
    csr_old   = (dec.csr_addr == CSR_MHARTID) ? HART_ID : csr_rdata;
    csr_wdata = rs1_v;
    csr_we    = 1'b0;
    if (dec.op == OP_CSR) begin
      case (dec.csr_op)
        CSR_RW:  begin csr_wdata = rs1_v;            csr_we = 1'b1; end
        CSR_RWI: begin csr_wdata = dec.imm;          csr_we = 1'b1; end
        CSR_RS:  begin csr_wdata = csr_old | rs1_v;  csr_we = (dec.rs1 != 5'd0); end
        default: ;
      endcase
    end
  end

  flexv_csr u_csr (
    .clk_i, .rst_ni,
    .csr_we_i   (adv && csr_we),
    .csr_addr_i (dec.csr_addr),
    .csr_wdata_i(csr_wdata),
    .csr_rdata_o(csr_rdata),
    .csr_valid_o(csr_valid),
    .mlc_we_a_i (adv && ml_load && dec.upd_a),
    .mlc_we_w_i (adv && ml_load && !dec.upd_a),
    .mlc_addr_i (mlc_upd_addr),
    .cfg_o      (cfg),
    .clear_mpc_o(clear_mpc),
    .clear_a_o  (clear_a),
    .clear_w_o  (clear_w)
  );

  // --------------------------------------------- dotp, MPC and MLC
  assign fmt_eff  = cfg.sb_legacy ? (dec.legacy_b ? FMT_8 : FMT_16) : cfg.simd_fmt;
  assign a_signed = (dec.sign == DOTP_SP);
  assign b_signed = (dec.sign != DOTP_UP);
  assign ml_load  = (dec.op == OP_MLSDOTP) && (dec.upd_a || dec.upd_w);

  dotp_unit u_dotp (
    .op_a_i    (dec.op == OP_MLSDOTP ? nn_a_v : rs1_v),
    .op_b_i    (dec.op == OP_MLSDOTP ? nn_w_v : rs2_v),
    .op_c_i    (rd_v),
    .fmt_i     (fmt_eff),
    .mpc_cnt_i (mpc_cnt),
    .a_signed_i(a_signed),
    .b_signed_i(b_signed),
    .en_i      (dec.virt_simd && run),
    .result_o  (dotp_res)
  );

  mpc u_mpc (
    .clk_i, .rst_ni,
    .fmt_i     (fmt_eff),
    .mix_skip_i(cfg.mix_skip),
    .clear_i   (clear_mpc),
    .step_i    (adv && dec.virt_simd && dec.rd != 5'd0),
    .mpc_cnt_o (mpc_cnt),
    .switch_o  (mpc_switch)
  );

  mlc u_mlc (
    .clk_i, .rst_ni,
    .a_address_i      (cfg.a_addr),
    .w_address_i      (cfg.w_addr),
    .a_stride_i       (cfg.a_stride),
    .w_stride_i       (cfg.w_stride),
    .a_rollback_i     (cfg.a_rollback),
    .w_rollback_i     (cfg.w_rollback),
    .a_skip_i         (cfg.a_skip),
    .w_skip_i         (cfg.w_skip),
    .update_a_ex_i    (ml_load && dec.upd_a),
    .update_w_ex_i    (ml_load && dec.upd_w),
    .adv_i            (adv),
    .clear_a_i        (clear_a),
    .clear_w_i        (clear_w),
    .load_addr_o      (mlc_load_addr),
    .updated_address_o(mlc_upd_addr),
    .rollback_o       (mlc_rollback)
  );

  // ------------------------------------------------------------ execute
  always_comb begin
    mem_op           = 1'b0;
    data_req_o       = '0;
    data_req_o.be    = 4'hF;
    case (dec.op)
      OP_LW: begin
        mem_op = 1'b1; data_req_o.addr = rs1_v + dec.imm;
      end
      OP_SW: begin
        mem_op = 1'b1; data_req_o.addr = rs1_v + dec.imm;
        data_req_o.we = 1'b1; data_req_o.wdata = rs2_v;
      end
      OP_MLSDOTP: if (ml_load) begin
        mem_op = 1'b1; data_req_o.addr = mlc_load_addr;
      end
      default: ;
    endcase
    data_req_o.req = run && mem_op && !(pend_q && !data_rsp_i.rvalid);
  end

  always_comb begin
    case (dec.op)
      OP_LUI:  alu_res = dec.imm;
      OP_ADDI: alu_res = rs1_v + dec.imm;
      OP_SLLI: alu_res = rs1_v << dec.imm[4:0];
      OP_ADD:  alu_res = rs1_v + rs2_v;
      OP_SUB:  alu_res = rs1_v - rs2_v;
      OP_CSR:  alu_res = csr_old;
      OP_SDOTP, OP_MLSDOTP: alu_res = dotp_res;
      default: alu_res = '0;
    endcase
  end

  assign stall = (pend_q && !data_rsp_i.rvalid)
              || (mem_op && !data_gnt_i)
              || (dec.op == OP_WFI && !barrier_go_i);
  assign adv   = run && !stall;
  assign barrier_req_o = started_q && !halted_q && dec.op == OP_WFI;

  always_comb begin
    pc_next = pc_q + 32'd4;
    lp_jump = 1'b0;
    if ((dec.op == OP_BEQ && rs1_v == rs2_v) || (dec.op == OP_BNE && rs1_v != rs2_v))
      pc_next = pc_q + dec.imm;
    else if (pc_q == lp_end_q && lp_cnt_q > 32'd1) begin
      pc_next = lp_start_q;
      lp_jump = 1'b1;
    end
  end

  // -------------------------------------------------------------- state
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pc_q       <= '0;
      started_q  <= 1'b0;
      halted_q   <= 1'b0;
      lp_start_q <= '0;
      lp_end_q   <= '1;
      lp_cnt_q   <= '0;
      pend_q     <= 1'b0;
      pend_nn_q  <= 1'b0;
      pend_idx_q <= '0;
      for (int i = 0; i < 32; i++) gpr_q[i] <= '0;
    end else begin
      if (!started_q && fetch_en_i) begin
        started_q <= 1'b1;
        pc_q      <= boot_addr_i;
      end
      // load write-back (one cycle after the grant)
      if (wb) begin
        pend_q <= 1'b0;
        if (!pend_nn_q && pend_idx_q != 5'd0) gpr_q[pend_idx_q] <= data_rsp_i.rdata;
      end
      if (adv) begin
        pc_q <= pc_next;
        if (dec.rd_we && dec.op != OP_LW) gpr_q[dec.rd] <= alu_res;
        if (dec.op == OP_LW) begin
          pend_q <= 1'b1; pend_nn_q <= 1'b0; pend_idx_q <= dec.rd;
        end else if (ml_load) begin
          pend_q     <= 1'b1;
          pend_nn_q  <= 1'b1;
          pend_idx_q <= dec.upd_a ? 5'(4 + 32'(dec.a_sel)) : {3'd0, dec.w_sel};
        end
        if (lp_jump) lp_cnt_q <= lp_cnt_q - 32'd1;
        else if (pc_q == lp_end_q && lp_cnt_q != '0) lp_cnt_q <= '0;
        if (dec.op == OP_LPSETUP) begin
          lp_start_q <= pc_q + 32'd4;
          lp_end_q   <= pc_q + dec.imm;
          lp_cnt_q   <= rs1_v;
        end
        if (dec.op == OP_EBREAK || dec.op == OP_ILLEGAL ||
            (dec.op == OP_CSR && !csr_valid && dec.csr_addr != CSR_MHARTID))
          halted_q <= 1'b1;
      end
    end
  end

  assign halted_o = halted_q;

  always_comb begin
    evt_o              = '0;
    evt_o.mem_stall    = run && data_req_o.req && !data_gnt_i;
    evt_o.mpc_switch   = mpc_switch;
    evt_o.mlc_rollback = adv && ml_load && mlc_rollback;
    evt_o.macload      = adv && ml_load;
    evt_o.hwloop_jump  = adv && lp_jump;
    evt_o.fwd          = adv && (f_rs1 || f_rs2 || f_rd || f_a || f_w) && dec.op != OP_ILLEGAL;
  end

  // A Mac&Load reloads exactly one register.
  a_one_load: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (adv && dec.op == OP_MLSDOTP) |-> !(dec.upd_a && dec.upd_w));

endmodule
