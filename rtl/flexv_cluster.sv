// flexv_cluster: parallel cluster of Flex-V cores for mixed-precision QNNs.
//
// N_CORES Flex-V cores share a TCDM of N_BANKS x BANK_WORDS 32-bit words
// (defaults: 8 cores, 16 banks, 128 kB) through a logarithmic interconnect
// with one-cycle read latency. A DMA, one more interconnect master, moves
// data between the TCDM and the host's L2 memory while the cores compute. A
// hardware synchronization unit implements the barrier (WFI) and removes the
// clock enable of cores waiting at it.
//
// Address map of the data side: only the TCDM is decoded; byte address bits
// [2 +: log2 N_BANKS] select the bank, the bits above the row.
//
// Boundary: the instruction cache is outside this RTL, so each core's fetch
// port (instr_addr_o / instr_rdata_i, data in the same cycle) is a cluster
// port; the DMA is configured from cluster ports (in the host system this
// comes from a control bus) and its L2 side is the l2_req_o / l2_gnt_i / l2_rsp_i
// request/grant/rvalid port. The event outputs (per-core stalls, Mac&Load
// activity, MPC slice switches, MLC rollbacks, hardware-loop jumps, load
// forwarding) are for performance counters and tests.
module flexv_cluster
  import flexv_pkg::*;
#(
  parameter int unsigned N_CORES    = 8,
  parameter int unsigned N_BANKS    = 16,
  parameter int unsigned BANK_WORDS = 2048
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               fetch_en_i,
  input  logic [31:0]        boot_addr_i,
  output logic [31:0]        instr_addr_o  [N_CORES],
  input  logic [31:0]        instr_rdata_i [N_CORES],
  input  logic               dma_start_i,
  input  logic               dma_dir_i,
  input  logic [31:0]        dma_ext_addr_i,
  input  logic [31:0]        dma_tcdm_addr_i,
  input  logic [15:0]        dma_len_i,
  output logic               dma_busy_o,
  output logic               dma_done_o,
  output tcdm_req_t          l2_req_o,
  input  logic               l2_gnt_i,
  input  tcdm_rsp_t          l2_rsp_i,
  output logic [N_CORES-1:0] halted_o,
  output logic [N_CORES-1:0] core_clk_en_o,
  output logic               barrier_release_o,
  output core_evt_t          core_evt_o [N_CORES]
);

  localparam int unsigned N_MASTERS = N_CORES + 1;
  localparam int unsigned RW        = $clog2(BANK_WORDS);

  tcdm_req_t          m_req [N_MASTERS];
  logic [N_MASTERS-1:0] m_gnt;
  tcdm_rsp_t          m_rsp [N_MASTERS];
  logic               bank_req   [N_BANKS];
  logic               bank_we    [N_BANKS];
  logic [3:0]         bank_be    [N_BANKS];
  logic [RW-1:0]      bank_addr  [N_BANKS];
  logic [31:0]        bank_wdata [N_BANKS];
  logic [31:0]        bank_rdata [N_BANKS];
  logic [N_CORES-1:0] barrier_req, barrier_go, clk_en, active;

  // ------------------------------------------------------------- cores
  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    flexv_core #(.HART_ID(32'(c))) u_core (
      .clk_i,
      .rst_ni,
      .fetch_en_i   (fetch_en_i),
      .boot_addr_i  (boot_addr_i),
      .clk_en_i     (clk_en[c]),
      .instr_addr_o (instr_addr_o[c]),
      .instr_rdata_i(instr_rdata_i[c]),
      .data_req_o   (m_req[c]),
      .data_gnt_i   (m_gnt[c]),
      .data_rsp_i   (m_rsp[c]),
      .barrier_req_o(barrier_req[c]),
      .barrier_go_i (barrier_go[c]),
      .halted_o     (halted_o[c]),
      .evt_o        (core_evt_o[c])
    );
  end

  assign active        = fetch_en_i ? ~halted_o : '0;
  assign core_clk_en_o = clk_en;

  hw_sync_unit #(.N_CORES(N_CORES)) u_sync (
    .clk_i, .rst_ni,
    .active_i     (active),
    .barrier_req_i(barrier_req),
    .barrier_go_o (barrier_go),
    .clk_en_o     (clk_en),
    .release_o    (barrier_release_o)
  );

  // --------------------------------------------------------------- DMA
  cluster_dma u_dma (
    .clk_i, .rst_ni,
    .start_i    (dma_start_i),
    .dir_i      (dma_dir_i),
    .ext_addr_i (dma_ext_addr_i),
    .tcdm_addr_i(dma_tcdm_addr_i),
    .len_i      (dma_len_i),
    .busy_o     (dma_busy_o),
    .done_o     (dma_done_o),
    .tcdm_req_o (m_req[N_CORES]),
    .tcdm_gnt_i (m_gnt[N_CORES]),
    .tcdm_rsp_i (m_rsp[N_CORES]),
    .ext_req_o  (l2_req_o),
    .ext_gnt_i  (l2_gnt_i),
    .ext_rsp_i  (l2_rsp_i)
  );

  // ------------------------------------------------- interconnect + TCDM
  log_interconnect #(
    .N_MASTERS (N_MASTERS),
    .N_BANKS   (N_BANKS),
    .BANK_WORDS(BANK_WORDS)
  ) u_xbar (
    .clk_i, .rst_ni,
    .m_req_i     (m_req),
    .m_gnt_o     (m_gnt),
    .m_rsp_o     (m_rsp),
    .bank_req_o  (bank_req),
    .bank_we_o   (bank_we),
    .bank_be_o   (bank_be),
    .bank_addr_o (bank_addr),
    .bank_wdata_o(bank_wdata),
    .bank_rdata_i(bank_rdata)
  );

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    tcdm_bank #(.WORDS(BANK_WORDS)) u_bank (
      .clk_i,
      .req_i  (bank_req[b]),
      .we_i   (bank_we[b]),
      .be_i   (bank_be[b]),
      .addr_i (bank_addr[b]),
      .wdata_i(bank_wdata[b]),
      .rdata_o(bank_rdata[b])
    );
  end

endmodule
