// rr_arbiter: round-robin arbiter used per TCDM bank.
//
// Grants one of N requesters in the request cycle (combinational). The
// requester after the last granted one has the highest priority, so every
// requester that keeps asking is served within N grants. The priority
// pointer moves on the clock edge when a grant is taken (advance_i).
module rr_arbiter #(
  parameter int unsigned N = 9
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [N-1:0]         req_i,
  input  logic                 advance_i,
  output logic [N-1:0]         gnt_o,
  output logic [$clog2(N)-1:0] idx_o,
  output logic                 valid_o
);

  localparam int unsigned IW = $clog2(N);
  logic [IW-1:0] ptr_q;   // highest-priority requester

  always_comb begin
    logic [IW-1:0] k;
    gnt_o   = '0;
    idx_o   = '0;
    valid_o = 1'b0;
    for (int unsigned i = 0; i < N; i++) begin
      k = IW'((32'(ptr_q) + i) % N);
      if (!valid_o && req_i[k]) begin
        valid_o  = 1'b1;
        idx_o    = k;
        gnt_o[k] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                   ptr_q <= '0;
    else if (advance_i && valid_o) ptr_q <= (32'(idx_o) + 1 == N) ? '0 : idx_o + IW'(1);
  end

endmodule
