// tb_nn_rf: random writes to the six registers, reads through both ports
// compared with a shadow copy.
module tb_nn_rf;
  logic clk = 0, rst_n = 0, we = 0; logic [2:0] wa; logic [31:0] wd, wr, ar; logic [1:0] ws; logic as;
  logic [31:0] shadow [6];
  int checks = 0, failures = 0;
  nn_rf dut (.clk_i(clk), .rst_ni(rst_n), .we_i(we), .waddr_i(wa), .wdata_i(wd), .w_sel_i(ws), .a_sel_i(as),
             .w_rdata_o(wr), .a_rdata_o(ar));
  always #5 clk = ~clk;
  initial begin
    for (int i = 0; i < 6; i++) shadow[i] = 0;
    wa = 0; wd = 0; ws = 0; as = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      #1; we = 1'($urandom); wa = 3'($urandom_range(0, 5)); wd = $urandom;
      ws = 2'($urandom); as = 1'($urandom);
      #1; checks += 2;
      if (wr !== shadow[ws]) begin failures++; $display("FAIL w%0d got %h exp %h", ws, wr, shadow[ws]); end
      if (ar !== shadow[4 + as]) begin failures++; $display("FAIL a%0d got %h exp %h", as, ar, shadow[4 + as]); end
      @(posedge clk); if (we) shadow[wa] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
