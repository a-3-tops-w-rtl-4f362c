// tb_flexv_csr: writes and reads back every extension CSR, checks the MLC
// pointer write-back, the priority of software writes, the clear pulses and
// that unknown addresses are flagged.
module tb_flexv_csr;
  import flexv_pkg::*;
  logic clk = 0, rst_n = 0, we = 0, mwa = 0, mww = 0, valid, cm, ca, cw;
  logic [11:0] addr; logic [31:0] wdata, rdata, maddr; ext_cfg_t cfg;
  int checks = 0, failures = 0;
  flexv_csr dut (.clk_i(clk), .rst_ni(rst_n), .csr_we_i(we), .csr_addr_i(addr), .csr_wdata_i(wdata),
                 .csr_rdata_o(rdata), .csr_valid_o(valid), .mlc_we_a_i(mwa), .mlc_we_w_i(mww), .mlc_addr_i(maddr),
                 .cfg_o(cfg), .clear_mpc_o(cm), .clear_a_o(ca), .clear_w_o(cw));
  always #5 clk = ~clk;
  task automatic chk(logic c, string m); checks++; if (!c) begin failures++; $display("FAIL %s", m); end endtask
  logic [11:0] addrs[11] = '{CSR_SB_LEGACY, CSR_SIMD_FMT, CSR_MIX_SKIP, CSR_A_STRIDE, CSR_W_STRIDE,
                             CSR_A_ROLLBACK, CSR_W_ROLLBACK, CSR_A_SKIP, CSR_W_SKIP, CSR_A_ADDR, CSR_W_ADDR};
  logic [31:0] masks[11] = '{32'h1, 32'hF, 32'hFFFF, '1, '1, '1, '1, 32'hFFFF, 32'hFFFF, '1, '1};
  logic [31:0] vals[11];
  initial begin
    addr = 0; wdata = 0; maddr = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 11; i++) begin
      vals[i] = (i == 1) ? 32'd8 : ($urandom & masks[i]);
      #1; addr = addrs[i]; wdata = vals[i]; we = 1; #1;
      chk(cm == (i == 1 || i == 2), "clear_mpc");
      chk(ca == (i == 7 || i == 9), "clear_a");
      chk(cw == (i == 8 || i == 10), "clear_w");
      @(posedge clk); #1; we = 0;
    end
    for (int i = 0; i < 11; i++) begin
      addr = addrs[i]; #1;
      chk(valid && rdata == vals[i], $sformatf("readback %h got %h exp %h", addrs[i], rdata, vals[i]));
    end
    chk(cfg.simd_fmt == FMT_MIX8x4 && cfg.a_stride == vals[3] && cfg.w_addr == vals[10], "cfg struct");
    addr = 12'h7C0; #1; chk(!valid, "unknown address flagged");
    // MLC pointer write-back
    maddr = 32'h1234; mwa = 1; @(posedge clk); #1; mwa = 0;
    chk(cfg.a_addr == 32'h1234, "mlc a write");
    maddr = 32'h5678; mww = 1; @(posedge clk); #1; mww = 0;
    chk(cfg.w_addr == 32'h5678, "mlc w write");
    // software write wins over MLC update
    maddr = 32'h1111; mww = 1; we = 1; addr = CSR_W_ADDR; wdata = 32'h2222;
    @(posedge clk); #1; mww = 0; we = 0;
    chk(cfg.w_addr == 32'h2222, "software priority");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
