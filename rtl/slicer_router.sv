// slicer_router: the Slicer & Router in front of the dot-product sub-units.
//
// In a mixed-precision dotp operand B (the weights) has narrower elements than
// operand A, so one 32-bit B word holds 2 or 4 times more elements than A
// has lanes. The slicer picks the slice of B that this instruction consumes,
// chosen by MPC_CNT (slice 0 = least significant elements); the router widens
// every element of that slice to the lane width of the sub-unit named by
// SIMD_FMT (sign or zero extension, following the instruction's signedness)
// and raises that sub-unit's select. Uniform formats pass B unchanged.
//
//   a8w4: B = 8 x 4-bit, slice = 4 elements, routed to DOTP-8  (cnt 0..1)
//   a8w2: B = 16 x 2-bit, slice = 4 elements, routed to DOTP-8 (cnt 0..3)
//   a4w2: B = 16 x 2-bit, slice = 8 elements, routed to DOTP-4 (cnt 0..1)
//
// Purely combinational. The slice/route scheme for a8w4 follows the published
// execution-flow figure; the a8w2 and a4w2 cases and the widening rule are
// this design's extension of the same idea.
module slicer_router
  import flexv_pkg::*;
(
  input  logic [31:0] op_b_i,
  input  simd_fmt_e   fmt_i,
  input  logic [1:0]  mpc_cnt_i,
  input  logic        b_signed_i,
  output logic [31:0] op_b_o,
  output logic [3:0]  unit_sel_o   // one-hot: [0] DOTP-16 .. [3] DOTP-2
);

  logic [15:0] half;     // half-word slice
  logic [7:0]  quarter;  // byte slice

  always_comb begin
    half    = mpc_cnt_i[0] ? op_b_i[31:16] : op_b_i[15:0];
    quarter = op_b_i[8*mpc_cnt_i +: 8];
    op_b_o  = op_b_i;
    case (fmt_i)
      FMT_MIX8x4:
        for (int i = 0; i < 4; i++)
          op_b_o[8*i +: 8] = {{4{b_signed_i & half[4*i+3]}}, half[4*i +: 4]};
      FMT_MIX8x2:
        for (int i = 0; i < 4; i++)
          op_b_o[8*i +: 8] = {{6{b_signed_i & quarter[2*i+1]}}, quarter[2*i +: 2]};
      FMT_MIX4x2:
        for (int i = 0; i < 8; i++)
          op_b_o[4*i +: 4] = {{2{b_signed_i & half[2*i+1]}}, half[2*i +: 2]};
      default: op_b_o = op_b_i;
    endcase
    unit_sel_o = 4'b0001 << fmt_unit(fmt_i);
  end

endmodule
