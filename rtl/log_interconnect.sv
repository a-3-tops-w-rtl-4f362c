// log_interconnect: logarithmic interconnect between the cluster's masters
// (the cores and the DMA) and the TCDM banks.
//
// Consecutive 32-bit words sit in consecutive banks (word interleaving):
// bank = addr[2 +: log2 N_BANKS], row = the address bits above. In every cycle
// each bank serves at most one request; when several masters hit the same
// bank a round-robin arbiter picks one, the others see gnt = 0 and must hold
// their request (a bank conflict). Requests to different banks proceed in
// parallel. Timing: gnt in the request cycle; for a read, rvalid and rdata
// in the next cycle (the one-cycle latency). Writes get no rvalid. Address
// bits above the TCDM size are ignored (no other slaves are decoded here).
// Interleaving and round-robin are this design's choice.
module log_interconnect
  import flexv_pkg::*;
#(
  parameter int unsigned N_MASTERS  = 9,
  parameter int unsigned N_BANKS    = 16,
  parameter int unsigned BANK_WORDS = 2048
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  tcdm_req_t                     m_req_i [N_MASTERS],
  output logic [N_MASTERS-1:0]          m_gnt_o,
  output tcdm_rsp_t                     m_rsp_o [N_MASTERS],
  output logic                          bank_req_o   [N_BANKS],
  output logic                          bank_we_o    [N_BANKS],
  output logic [3:0]                    bank_be_o    [N_BANKS],
  output logic [$clog2(BANK_WORDS)-1:0] bank_addr_o  [N_BANKS],
  output logic [31:0]                   bank_wdata_o [N_BANKS],
  input  logic [31:0]                   bank_rdata_i [N_BANKS]
);

  localparam int unsigned BW = $clog2(N_BANKS);
  localparam int unsigned RW = $clog2(BANK_WORDS);
  localparam int unsigned MW = $clog2(N_MASTERS);

  logic [BW-1:0]        m_bank [N_MASTERS];
  logic [N_MASTERS-1:0] b_req  [N_BANKS];
  logic [N_MASTERS-1:0] b_gnt  [N_BANKS];
  logic [MW-1:0]        b_idx  [N_BANKS];
  logic                 b_val  [N_BANKS];
  logic [N_MASTERS-1:0] rvalid_q;
  logic [BW-1:0]        rbank_q [N_MASTERS];

  always_comb begin
    for (int m = 0; m < N_MASTERS; m++) m_bank[m] = m_req_i[m].addr[2 +: BW];
    for (int b = 0; b < N_BANKS; b++)
      for (int m = 0; m < N_MASTERS; m++)
        b_req[b][m] = m_req_i[m].req && (m_bank[m] == BW'(b));
  end

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    rr_arbiter #(.N(N_MASTERS)) u_arb (
      .clk_i, .rst_ni,
      .req_i    (b_req[b]),
      .advance_i(1'b1),
      .gnt_o    (b_gnt[b]),
      .idx_o    (b_idx[b]),
      .valid_o  (b_val[b])
    );

    assign bank_req_o[b]   = b_val[b];
    assign bank_we_o[b]    = m_req_i[b_idx[b]].we;
    assign bank_be_o[b]    = m_req_i[b_idx[b]].be;
    assign bank_addr_o[b]  = m_req_i[b_idx[b]].addr[2+BW +: RW];
    assign bank_wdata_o[b] = m_req_i[b_idx[b]].wdata;

    // Bus rules: a bank grants at most one master per cycle, and only one
    // that requests it.
    a_one_gnt: assert property (@(posedge clk_i) $onehot0(b_gnt[b]));
    a_gnt_req: assert property (@(posedge clk_i) (b_gnt[b] & ~b_req[b]) == '0);
  end

  // A granted read answers with rvalid in the next cycle, a write never.
  for (genvar m = 0; m < N_MASTERS; m++) begin : g_chk
    a_rvalid: assert property (@(posedge clk_i) disable iff (!rst_ni)
      m_rsp_o[m].rvalid == $past(m_gnt_o[m] && !m_req_i[m].we));
  end

  always_comb
    for (int m = 0; m < N_MASTERS; m++) m_gnt_o[m] = b_gnt[m_bank[m]][m];

  always_comb begin
    for (int m = 0; m < N_MASTERS; m++) begin
      m_rsp_o[m].rvalid = rvalid_q[m];
      m_rsp_o[m].rdata  = bank_rdata_i[rbank_q[m]];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q <= '0;
      for (int m = 0; m < N_MASTERS; m++) rbank_q[m] <= '0;
    end else begin
      for (int m = 0; m < N_MASTERS; m++) begin
        rvalid_q[m] <= m_gnt_o[m] && !m_req_i[m].we;
        if (m_gnt_o[m]) rbank_q[m] <= m_bank[m];
      end
    end
  end

endmodule
