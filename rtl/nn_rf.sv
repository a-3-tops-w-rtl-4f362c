// nn_rf: Neural Network Register File of the Flex-V core.
//
// Six 32-bit registers beside the general-purpose register file: w0..w3 hold
// weight words and a0..a1 activation words. A Mac&Load reads one activation
// and one weight register as its dotp operands and, in its write-back stage,
// writes the word it loaded into one of the six. Keeping these registers
// apart is what lets the load write back in the same instruction without a
// second GP-RF write port. The 4 + 2 split is taken from the register indices
// used by the published 8x4 MatMul kernel.
//
// Interface: write address 0..3 = w0..w3, 4..5 = a0..a1. Reads are
// combinational; a write lands on the clock edge. Registers reset to zero.
module nn_rf #(
  parameter int unsigned N_W = 4,
  parameter int unsigned N_A = 2
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  input  logic                         we_i,
  input  logic [$clog2(N_W+N_A)-1:0]   waddr_i,
  input  logic [31:0]                  wdata_i,
  input  logic [$clog2(N_W)-1:0]       w_sel_i,
  input  logic [$clog2(N_A)-1:0]       a_sel_i,
  output logic [31:0]                  w_rdata_o,
  output logic [31:0]                  a_rdata_o
);

  localparam int unsigned AW = $clog2(N_W + N_A);

  logic [31:0] regs_q [N_W+N_A];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < N_W + N_A; i++) regs_q[i] <= '0;
    end else if (we_i && (32'(waddr_i) < N_W + N_A)) begin
      regs_q[waddr_i] <= wdata_i;
    end
  end

  assign w_rdata_o = regs_q[AW'(w_sel_i)];
  assign a_rdata_o = regs_q[AW'(N_W + 32'(a_sel_i))];

endmodule
