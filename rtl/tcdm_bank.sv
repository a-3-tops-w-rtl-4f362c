// tcdm_bank: one bank of the cluster's shared L1 data memory (TCDM).
//
// A single-port SRAM of WORDS 32-bit words with byte enables: a read returns
// its word on the clock edge after the request (one-cycle latency), a write
// updates the enabled bytes on that edge. The default of 2048 words makes
// 16 banks hold 128 kB. Written as a plain array; a silicon implementation
// would use an SRAM macro with the same interface. Contents are not reset.
module tcdm_bank #(
  parameter int unsigned WORDS = 2048
) (
  input  logic                     clk_i,
  input  logic                     req_i,
  input  logic                     we_i,
  input  logic [3:0]               be_i,
  input  logic [$clog2(WORDS)-1:0] addr_i,
  input  logic [31:0]              wdata_i,
  output logic [31:0]              rdata_o
);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < 4; b++)
          if (be_i[b]) mem[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end

endmodule
