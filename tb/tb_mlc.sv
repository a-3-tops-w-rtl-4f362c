// tb_mlc: walks the published weight pattern (base, +stride x3, +rollback to
// base+4, ...) and an interleaved activation stream, holding the pointers in
// testbench registers the way the CSR block does, and checks every load
// address against closed-form positions.
module tb_mlc;
  logic clk = 0, rst_n = 0;
  logic [31:0] a_addr, w_addr, load_addr, upd; logic upd_a = 0, upd_w = 0, adv = 0, clr_a = 0, clr_w = 0, rb;
  int checks = 0, failures = 0, n_rb = 0;
  localparam int WS = 16, AS = 32;
  mlc dut (.clk_i(clk), .rst_ni(rst_n), .a_address_i(a_addr), .w_address_i(w_addr),
           .a_stride_i(AS), .w_stride_i(WS), .a_rollback_i(4 - 3 * AS), .w_rollback_i(4 - 3 * WS),
           .a_skip_i(16'd4), .w_skip_i(16'd4), .update_a_ex_i(upd_a), .update_w_ex_i(upd_w), .adv_i(adv),
           .clear_a_i(clr_a), .clear_w_i(clr_w), .load_addr_o(load_addr), .updated_address_o(upd), .rollback_o(rb));
  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (adv && upd_a) a_addr <= upd;
    else if (adv && upd_w) w_addr <= upd;
    if (adv && rb) n_rb++;
  end
  initial begin
    int na = 0, nw = 0;
    a_addr = 32'h2000; w_addr = 32'h1000;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      int exp;
      #1;
      upd_a = 1'($urandom); upd_w = !upd_a; adv = 1'($urandom_range(0, 3) != 0);
      #1;
      if (upd_a) exp = 32'h2000 + (na % 4) * AS + (na / 4) * 4;
      else       exp = 32'h1000 + (nw % 4) * WS + (nw / 4) * 4;
      checks++;
      if (load_addr !== 32'(exp)) begin failures++; $display("FAIL i=%0d a=%0d got %h exp %h", i, upd_a, load_addr, exp); end
      @(posedge clk);
      if (adv) begin if (upd_a) na++; else nw++; end
    end
    adv = 0;
    // clear restarts the counter: after clear the next w update is a stride
    #1; clr_w = 1; @(posedge clk); #1; clr_w = 0; w_addr = 32'h3000;
    upd_w = 1; upd_a = 0; adv = 1;
    for (int k = 0; k < 5; k++) begin
      #1; checks++;
      if (load_addr !== 32'h3000 + 32'((k % 4) * WS + (k / 4) * 4)) begin failures++; $display("FAIL after clear k=%0d got %h", k, load_addr); end
      @(posedge clk);
    end
    adv = 0;
    checks++; if (n_rb == 0) begin failures++; $display("FAIL no rollback"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
