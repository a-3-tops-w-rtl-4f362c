// mlc: Mac&Load Controller, the address generator of the fused Mac&Load.
//
// Each Mac&Load may reload one NN-RF register, either an activation (update_a)
// or a weight (update_w). The MLC supplies the load address, which is the
// current value of the a or w pointer, and the pointer's next value, which
// the CSR block stores back. The pointer walks a two-dimensional pattern: for
// skip-1 updates it adds the stride (inner direction), on the skip-th it adds
// the rollback, which undoes the inner walk and steps once in the outer
// direction. Example, skip = 4: base, +stride, +stride, +stride, +rollback.
//
// Datapath, one-to-one with the published schematic: per stream an update
// counter and an equality compare against skip-1 that selects stride or
// rollback; a multiplexer that picks the a or w increment and a multiplexer
// that picks the a or w address; one shared adder producing updated_address.
// The counter wrapping to 0 after the rollback, the restart on clear, and the
// priority of a over w if both were requested are this design's choices.
//
// Timing: load_addr_o/updated_address_o are combinational from the request;
// the counters advance on the clock edge of the request cycle (when adv_i).
module mlc #(
  parameter int unsigned CNT_W = 16
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic [31:0]      a_address_i,
  input  logic [31:0]      w_address_i,
  input  logic [31:0]      a_stride_i,
  input  logic [31:0]      w_stride_i,
  input  logic [31:0]      a_rollback_i,
  input  logic [31:0]      w_rollback_i,
  input  logic [CNT_W-1:0] a_skip_i,
  input  logic [CNT_W-1:0] w_skip_i,
  input  logic             update_a_ex_i,
  input  logic             update_w_ex_i,
  input  logic             adv_i,          // the requesting instruction retires
  input  logic             clear_a_i,
  input  logic             clear_w_i,
  output logic [31:0]      load_addr_o,
  output logic [31:0]      updated_address_o,
  output logic             rollback_o      // this update takes the rollback
);

  logic [CNT_W-1:0] a_cnt_q, w_cnt_q;
  logic             a_eq, w_eq;
  logic [31:0]      a_increment, w_increment, increment;
  logic             sel_a;

  assign a_eq        = (a_cnt_q + CNT_W'(1) >= a_skip_i);
  assign w_eq        = (w_cnt_q + CNT_W'(1) >= w_skip_i);
  assign a_increment = a_eq ? a_rollback_i : a_stride_i;
  assign w_increment = w_eq ? w_rollback_i : w_stride_i;

  assign sel_a             = update_a_ex_i;
  assign load_addr_o       = sel_a ? a_address_i : w_address_i;
  assign increment         = sel_a ? a_increment : w_increment;
  assign updated_address_o = load_addr_o + increment;
  assign rollback_o        = sel_a ? (update_a_ex_i && a_eq) : (update_w_ex_i && w_eq);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      a_cnt_q <= '0;
      w_cnt_q <= '0;
    end else begin
      if (clear_a_i)                              a_cnt_q <= '0;
      else if (adv_i && update_a_ex_i)            a_cnt_q <= a_eq ? '0 : a_cnt_q + CNT_W'(1);
      if (clear_w_i)                              w_cnt_q <= '0;
      else if (adv_i && update_w_ex_i && !sel_a)  w_cnt_q <= w_eq ? '0 : w_cnt_q + CNT_W'(1);
    end
  end

endmodule
