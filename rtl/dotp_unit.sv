// dotp_unit: mixed-precision sum-of-dot-product unit of the Flex-V core.
//
// Result = C + sum_i A_i * B_i, for uniform 16/8/4/2-bit operands and for the
// mixed formats a8w4, a8w2 and a4w2. Structure, as in the published block
// diagram: a Slicer & Router prepares operand B, four sub-units (DOTP-16,
// DOTP-8, DOTP-4, DOTP-2) compute in parallel, and an output multiplexer picks
// the sub-unit selected by SIMD_FMT. The inputs of the sub-units that are not
// selected are forced to zero (operand isolation), so only one of them toggles;
// the diagram draws a small gate in front of each sub-unit, and reading it as
// isolation rather than as a pipeline register is this design's choice.
//
// Timing: combinational, one dotp per cycle in the execute stage.
// Interface: op_a_i activations, op_b_i weights, op_c_i accumulator, fmt_i the
// SIMD format from the CSR, mpc_cnt_i the slice index from the MPC.
module dotp_unit
  import flexv_pkg::*;
(
  input  logic [31:0] op_a_i,
  input  logic [31:0] op_b_i,
  input  logic [31:0] op_c_i,
  input  simd_fmt_e   fmt_i,
  input  logic [1:0]  mpc_cnt_i,
  input  logic        a_signed_i,
  input  logic        b_signed_i,
  input  logic        en_i,
  output logic [31:0] result_o
);

  logic [31:0] b_routed;
  logic [3:0]  unit_sel;
  logic [31:0] a_iso [4];
  logic [31:0] b_iso [4];
  logic [31:0] c_iso [4];
  logic [31:0] res   [4];

  slicer_router u_slicer_router (
    .op_b_i    (op_b_i),
    .fmt_i     (fmt_i),
    .mpc_cnt_i (mpc_cnt_i),
    .b_signed_i(b_signed_i),
    .op_b_o    (b_routed),
    .unit_sel_o(unit_sel)
  );

  always_comb begin
    for (int u = 0; u < 4; u++) begin
      a_iso[u] = (en_i && unit_sel[u]) ? op_a_i   : '0;
      b_iso[u] = (en_i && unit_sel[u]) ? b_routed : '0;
      c_iso[u] = (en_i && unit_sel[u]) ? op_c_i   : '0;
    end
  end

  dotp_lanes #(.ELEM_W(16)) u_dotp16 (.a_i(a_iso[0]), .b_i(b_iso[0]), .c_i(c_iso[0]),
    .a_signed_i(a_signed_i), .b_signed_i(b_signed_i), .result_o(res[0]));
  dotp_lanes #(.ELEM_W(8))  u_dotp8  (.a_i(a_iso[1]), .b_i(b_iso[1]), .c_i(c_iso[1]),
    .a_signed_i(a_signed_i), .b_signed_i(b_signed_i), .result_o(res[1]));
  dotp_lanes #(.ELEM_W(4))  u_dotp4  (.a_i(a_iso[2]), .b_i(b_iso[2]), .c_i(c_iso[2]),
    .a_signed_i(a_signed_i), .b_signed_i(b_signed_i), .result_o(res[2]));
  dotp_lanes #(.ELEM_W(2))  u_dotp2  (.a_i(a_iso[3]), .b_i(b_iso[3]), .c_i(c_iso[3]),
    .a_signed_i(a_signed_i), .b_signed_i(b_signed_i), .result_o(res[3]));

  // Output multiplexer
  always_comb begin
    result_o = '0;
    for (int u = 0; u < 4; u++)
      if (unit_sel[u]) result_o = res[u];
  end

endmodule
