// dotp_lanes: one dot-product sub-unit (DOTP-16, DOTP-8, DOTP-4 or DOTP-2).
//
// Splits A and B into 32/ELEM_W lanes of ELEM_W bits, multiplies lane by lane
// (each operand sign- or zero-extended by one bit, so one multiplier serves
// signed and unsigned data), sums the products and adds the accumulator C.
// Combinational; the result wraps modulo 2^32. The adder-tree shape is left to
// synthesis.
module dotp_lanes #(
  parameter int unsigned ELEM_W = 8
) (
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  input  logic [31:0] c_i,
  input  logic        a_signed_i,
  input  logic        b_signed_i,
  output logic [31:0] result_o
);

  localparam int unsigned LANES = 32 / ELEM_W;

  always_comb begin
    logic signed [ELEM_W:0]     ea, eb;
    logic signed [31:0]         prod;  // product modulo 2^32, as the wrapping sum needs
    logic [31:0]                acc;
    acc = c_i;
    for (int i = 0; i < LANES; i++) begin
      ea   = $signed({a_signed_i & a_i[ELEM_W*i+ELEM_W-1], a_i[ELEM_W*i +: ELEM_W]});
      eb   = $signed({b_signed_i & b_i[ELEM_W*i+ELEM_W-1], b_i[ELEM_W*i +: ELEM_W]});
      prod = 32'(ea) * 32'(eb);
      acc  = acc + prod;
    end
    result_o = acc;
  end

endmodule
