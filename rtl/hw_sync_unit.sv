// hw_sync_unit: the cluster's Hardware Synchronization Unit (barrier part).
//
// A core that reaches a barrier (executes WFI) raises barrier_req. From the
// next cycle its clock enable is dropped, so an idle core waiting for the
// others burns no dynamic power. When every active core (active_i, typically
// started and not halted) is at the barrier, all are released together:
// barrier_go and the clock enables are raised in that same cycle, and the
// cores step past the WFI. A core that is not active never holds a barrier.
// Realising clock gating as an enable (rather than instantiating a clock-gate
// cell) and handling only one barrier are this design's choices; thread
// dispatch is reduced to the cluster's fetch enable.
module hw_sync_unit #(
  parameter int unsigned N_CORES = 8
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic [N_CORES-1:0] active_i,
  input  logic [N_CORES-1:0] barrier_req_i,
  output logic [N_CORES-1:0] barrier_go_o,
  output logic [N_CORES-1:0] clk_en_o,
  output logic               release_o
);

  logic [N_CORES-1:0] waiting_q, arrived;

  assign arrived      = waiting_q | barrier_req_i;
  assign release_o    = |(active_i & arrived) && ((active_i & ~arrived) == '0);
  assign barrier_go_o = release_o ? arrived : '0;
  assign clk_en_o     = release_o ? '1 : ~waiting_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)        waiting_q <= '0;
    else if (release_o) waiting_q <= '0;
    else                waiting_q <= arrived & active_i;
  end

endmodule
