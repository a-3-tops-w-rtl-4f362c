// flexv_csr: control/status registers of the Flex-V extension.
//
// Holds the state that turns one dotp opcode into a family of "virtual"
// instructions and drives the two controllers:
//   sb_legacy            1: dotps use their .h/.b suffix (plain XpulpV2 style)
//   simd_fmt             operand format (flexv_pkg::simd_fmt_e), read by the
//                        Dotp unit and the MPC
//   mix_skip             dotps per weight slice (MPC)
//   a/w_stride, a/w_rollback, a/w_skip   the MLC's walk parameters
//   a_csr, w_csr         the activation and weight pointers; software writes
//                        the base, the MLC writes every updated address back
// Registers change only when written (write-enabled, the software view of the
// clock-gated CSRs). A software write wins over an MLC update in the same
// cycle. Writing simd_fmt/mix_skip raises clear_mpc_o, writing a pointer or
// its skip raises clear_a_o/clear_w_o, for one cycle, so the controllers
// restart. CSR addresses and reset values are this design's choice.
//
// Timing: reads are combinational, writes take effect on the next edge.
module flexv_csr
  import flexv_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        csr_we_i,
  input  logic [11:0] csr_addr_i,
  input  logic [31:0] csr_wdata_i,
  output logic [31:0] csr_rdata_o,
  output logic        csr_valid_o,    // address belongs to this block
  input  logic        mlc_we_a_i,
  input  logic        mlc_we_w_i,
  input  logic [31:0] mlc_addr_i,
  output ext_cfg_t    cfg_o,
  output logic        clear_mpc_o,
  output logic        clear_a_o,
  output logic        clear_w_o
);

  ext_cfg_t cfg_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_q          <= '0;
      cfg_q.simd_fmt <= FMT_8;
      cfg_q.mix_skip <= 16'd1;
      cfg_q.a_skip   <= 16'd1;
      cfg_q.w_skip   <= 16'd1;
    end else begin
      if (mlc_we_a_i) cfg_q.a_addr <= mlc_addr_i;
      if (mlc_we_w_i) cfg_q.w_addr <= mlc_addr_i;
      if (csr_we_i) begin
        case (csr_addr_i)
          CSR_SB_LEGACY:  cfg_q.sb_legacy  <= csr_wdata_i[0];
          CSR_SIMD_FMT:   cfg_q.simd_fmt   <= simd_fmt_e'(csr_wdata_i[3:0]);
          CSR_MIX_SKIP:   cfg_q.mix_skip   <= csr_wdata_i[15:0];
          CSR_A_STRIDE:   cfg_q.a_stride   <= csr_wdata_i;
          CSR_W_STRIDE:   cfg_q.w_stride   <= csr_wdata_i;
          CSR_A_ROLLBACK: cfg_q.a_rollback <= csr_wdata_i;
          CSR_W_ROLLBACK: cfg_q.w_rollback <= csr_wdata_i;
          CSR_A_SKIP:     cfg_q.a_skip     <= csr_wdata_i[15:0];
          CSR_W_SKIP:     cfg_q.w_skip     <= csr_wdata_i[15:0];
          CSR_A_ADDR:     cfg_q.a_addr     <= csr_wdata_i;
          CSR_W_ADDR:     cfg_q.w_addr     <= csr_wdata_i;
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    csr_valid_o = 1'b1;
    case (csr_addr_i)
      CSR_SB_LEGACY:  csr_rdata_o = {31'd0, cfg_q.sb_legacy};
      CSR_SIMD_FMT:   csr_rdata_o = {28'd0, cfg_q.simd_fmt};
      CSR_MIX_SKIP:   csr_rdata_o = {16'd0, cfg_q.mix_skip};
      CSR_A_STRIDE:   csr_rdata_o = cfg_q.a_stride;
      CSR_W_STRIDE:   csr_rdata_o = cfg_q.w_stride;
      CSR_A_ROLLBACK: csr_rdata_o = cfg_q.a_rollback;
      CSR_W_ROLLBACK: csr_rdata_o = cfg_q.w_rollback;
      CSR_A_SKIP:     csr_rdata_o = {16'd0, cfg_q.a_skip};
      CSR_W_SKIP:     csr_rdata_o = {16'd0, cfg_q.w_skip};
      CSR_A_ADDR:     csr_rdata_o = cfg_q.a_addr;
      CSR_W_ADDR:     csr_rdata_o = cfg_q.w_addr;
      default: begin
        csr_rdata_o = '0;
        csr_valid_o = 1'b0;
      end
    endcase
  end

  assign cfg_o       = cfg_q;
  assign clear_mpc_o = csr_we_i && (csr_addr_i == CSR_SIMD_FMT || csr_addr_i == CSR_MIX_SKIP);
  assign clear_a_o   = csr_we_i && (csr_addr_i == CSR_A_ADDR || csr_addr_i == CSR_A_SKIP);
  assign clear_w_o   = csr_we_i && (csr_addr_i == CSR_W_ADDR || csr_addr_i == CSR_W_SKIP);

endmodule
