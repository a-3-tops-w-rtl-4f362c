// tb_tcdm_bank: random reads and byte-enabled writes against a shadow array;
// read data must appear exactly one cycle after the request.
module tb_tcdm_bank;
  localparam int W = 64;
  logic clk = 0, req = 0, we = 0; logic [3:0] be; logic [5:0] addr; logic [31:0] wd, rd;
  logic [31:0] shadow [W];
  int checks = 0, failures = 0;
  tcdm_bank #(.WORDS(W)) dut (.clk_i(clk), .req_i(req), .we_i(we), .be_i(be), .addr_i(addr), .wdata_i(wd), .rdata_o(rd));
  always #5 clk = ~clk;
  initial begin
    be = '1; addr = 0; wd = 0;
    for (int i = 0; i < W; i++) begin
      @(negedge clk); req = 1; we = 1; be = 4'hF; addr = 6'(i); wd = $urandom; shadow[i] = wd;
    end
    for (int it = 0; it < 500; it++) begin
      logic [31:0] exp; logic was_rd;
      @(negedge clk); req = 1'($urandom_range(0, 3) != 0); we = 1'($urandom); be = 4'($urandom);
      addr = 6'($urandom); wd = $urandom;
      exp = shadow[addr]; was_rd = req && !we;
      if (req && we) for (int b = 0; b < 4; b++) if (be[b]) shadow[addr][8*b +: 8] = wd[8*b +: 8];
      @(negedge clk); req = 0;
      if (was_rd) begin
        checks++;
        if (rd !== exp) begin failures++; $display("FAIL addr %0d got %h exp %h", addr, rd, exp); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
