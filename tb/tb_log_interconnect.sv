// tb_log_interconnect: masters issue random reads/writes (holding a request
// until granted) into 4 banks; checks at most one grant per bank per cycle,
// no grant to a master whose bank was idle-requested by nobody else being
// starved, read data one cycle after the grant equal to a shadow memory, and
// that bank conflicts occurred.
module tb_log_interconnect;
  import flexv_pkg::*;
  localparam int NM = 3, NB = 4, BW = 16;
  logic clk = 0, rst_n = 0;
  tcdm_req_t req [NM]; logic [NM-1:0] gnt; tcdm_rsp_t rsp [NM];
  logic breq [NB]; logic bwe [NB]; logic [3:0] bbe [NB]; logic [3:0] baddr [NB]; logic [31:0] bwd [NB]; logic [31:0] brd [NB];
  logic [31:0] shadow [NB*BW];
  logic [31:0] exp_q [NM]; logic pend_q [NM];
  int checks = 0, failures = 0, conflicts = 0, wait_cnt [NM];
  logic granted [NM];
  log_interconnect #(.N_MASTERS(NM), .N_BANKS(NB), .BANK_WORDS(BW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .m_req_i(req), .m_gnt_o(gnt), .m_rsp_o(rsp), .bank_req_o(breq), .bank_we_o(bwe),
    .bank_be_o(bbe), .bank_addr_o(baddr), .bank_wdata_o(bwd), .bank_rdata_i(brd));
  for (genvar b = 0; b < NB; b++) begin : g_b
    tcdm_bank #(.WORDS(BW)) u_b (.clk_i(clk), .req_i(breq[b]), .we_i(bwe[b]), .be_i(bbe[b]), .addr_i(baddr[b]),
                                 .wdata_i(bwd[b]), .rdata_o(brd[b]));
  end
  always #5 clk = ~clk;
  initial begin
    for (int m = 0; m < NM; m++) begin req[m] = '0; pend_q[m] = 0; wait_cnt[m] = 0; granted[m] = 0; end
    for (int i = 0; i < NB*BW; i++) shadow[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // initialise memory through master 0
    for (int i = 0; i < NB*BW; i++) begin
      @(negedge clk); req[0] = '{req: 1, addr: 32'(i*4), we: 1, be: 4'hF, wdata: 32'(i * 7 + 1)};
      shadow[i] = 32'(i * 7 + 1);
      #1; while (!gnt[0]) begin @(negedge clk); #1; end
    end
    @(negedge clk); req[0] = '0;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      int ng [NB];
      @(negedge clk);
      // responses of last cycle's grants
      for (int m = 0; m < NM; m++) if (pend_q[m]) begin
        checks++;
        if (!rsp[m].rvalid || rsp[m].rdata !== exp_q[m]) begin failures++; $display("FAIL m%0d rdata %h exp %h", m, rsp[m].rdata, exp_q[m]); end
        pend_q[m] = 0;
      end
      for (int m = 0; m < NM; m++) if (!req[m].req || granted[m]) begin
        req[m].req = 1'($urandom_range(0, 3) != 0);
        req[m].addr = 32'($urandom_range(0, NB*BW - 1) * 4);
        req[m].we = 1'($urandom_range(0, 3) == 0);
        req[m].be = 4'hF; req[m].wdata = $urandom;
      end
      #1;
      for (int b = 0; b < NB; b++) ng[b] = 0;
      for (int m = 0; m < NM; m++) begin
        granted[m] = gnt[m];
        if (gnt[m]) begin
          int w;
          w = int'(req[m].addr >> 2);
          ng[w % NB]++;
          if (req[m].we) shadow[w] = req[m].wdata;
          else begin pend_q[m] = 1; exp_q[m] = shadow[w]; end
          wait_cnt[m] = 0;
        end else if (req[m].req) begin
          conflicts++; wait_cnt[m]++;
          checks++; if (wait_cnt[m] > NM) begin failures++; $display("FAIL m%0d starved", m); end
        end
      end
      for (int b = 0; b < NB; b++) begin checks++; if (ng[b] > 1) begin failures++; $display("FAIL bank %0d double grant", b); for (int q = 0; q < NM; q++) $display("  m%0d req=%b addr=%h gnt=%b", q, req[q].req, req[q].addr, gnt[q]); end end
      // a request to a bank no one else wants must be granted
      for (int m = 0; m < NM; m++) if (req[m].req) begin
        int same;
        same = 0;
        for (int k = 0; k < NM; k++) if (req[k].req && req[k].addr[3:2] == req[m].addr[3:2]) same++;
        if (same == 1) begin checks++; if (!gnt[m]) begin failures++; $display("FAIL lone request not granted"); end end
      end
    end
    checks++; if (conflicts == 0) begin failures++; $display("FAIL no conflicts exercised"); end
    $display("conflict cycles: %0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
