// mpc: Mixed-Precision Controller.
//
// In a mixed-precision format one weight word feeds 2 (a8w4, a4w2) or 4
// (a8w2) groups of dot products. The MPC tells the slicer which slice of the
// weight word is current (MPC_CNT). It counts the virtual SIMD dotps that
// step_i reports; after mix_skip of them it moves MPC_CNT to the next slice,
// wrapping after the last one. In uniform formats MPC_CNT stays 0.
//
// mix_skip (the "weight reuse parameter") comes from a CSR; a kernel with a
// 4x4 block of accumulators sets it to 16, so 16 dotps use the low half of the
// weights and the next 16 the high half. clear_i (any write to simd_fmt or
// mix_skip) restarts both counters; that restart rule and the choice of which
// instructions are counted (decided by the core) are this design's.
//
// Timing: mpc_cnt_o is a register; a step in cycle t affects the slice used
// from cycle t+1. switch_o pulses in the step cycle that moves the slice.
module mpc
  import flexv_pkg::*;
#(
  parameter int unsigned CNT_W = 16
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  simd_fmt_e        fmt_i,
  input  logic [CNT_W-1:0] mix_skip_i,
  input  logic             clear_i,
  input  logic             step_i,
  output logic [1:0]       mpc_cnt_o,
  output logic             switch_o
);

  logic [CNT_W-1:0] cnt_q;
  logic [1:0]       slice_q;
  logic [2:0]       ratio;
  logic             last_in_slice;

  assign ratio         = fmt_ratio(fmt_i);
  assign last_in_slice = (cnt_q + CNT_W'(1) >= mix_skip_i);
  assign switch_o      = step_i && !clear_i && (ratio != 3'd1) && last_in_slice;
  assign mpc_cnt_o     = slice_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q   <= '0;
      slice_q <= '0;
    end else if (clear_i || ratio == 3'd1) begin
      cnt_q   <= '0;
      slice_q <= '0;
    end else if (step_i) begin
      if (last_in_slice) begin
        cnt_q   <= '0;
        slice_q <= (3'(slice_q) + 3'd1 >= ratio) ? 2'd0 : slice_q + 2'd1;
      end else begin
        cnt_q   <= cnt_q + CNT_W'(1);
      end
    end
  end

endmodule
