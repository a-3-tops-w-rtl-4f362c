// tb_cluster_dma: copies a block from the L2 model into a TCDM bank model
// (with random grant refusals on both sides), then a block back, and
// compares both memories word by word; checks busy/done behaviour.
module tb_cluster_dma;
  import flexv_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, dir = 0, busy, done;
  logic [31:0] ea, ta; logic [15:0] len;
  tcdm_req_t treq, ereq; logic tgnt, egnt; tcdm_rsp_t trsp, ersp;
  logic [31:0] tmem [1024]; logic tval; logic [31:0] tdat; logic tgnt_ok = 1;
  int checks = 0, failures = 0, ndone = 0;
  cluster_dma dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .dir_i(dir), .ext_addr_i(ea), .tcdm_addr_i(ta),
                   .len_i(len), .busy_o(busy), .done_o(done), .tcdm_req_o(treq), .tcdm_gnt_i(tgnt), .tcdm_rsp_i(trsp),
                   .ext_req_o(ereq), .ext_gnt_i(egnt), .ext_rsp_i(ersp));
  l2_model #(.WORDS(1024), .LAT(3)) u_l2 (.clk_i(clk), .req_i(ereq), .gnt_o(egnt), .rsp_o(ersp));
  always #5 clk = ~clk;
  // TCDM side: one-cycle latency, random conflicts
  assign tgnt = treq.req && tgnt_ok;
  assign trsp.rvalid = tval; assign trsp.rdata = tdat;
  always @(posedge clk) begin
    tgnt_ok <= 1'($urandom_range(0, 3) != 0);
    tval <= tgnt && !treq.we; tdat <= tmem[(treq.addr >> 2) % 1024];
    if (tgnt && treq.we) tmem[(treq.addr >> 2) % 1024] <= treq.wdata;
    if (done && rst_n) ndone++;
  end
  task automatic xfer(logic d, int e, int t, int n);
    @(negedge clk); dir = d; ea = 32'(e); ta = 32'(t); len = 16'(n); start = 1;
    @(negedge clk); start = 0;
    checks++; if (!busy) begin failures++; $display("FAIL not busy"); end
    while (busy) @(negedge clk);
  endtask
  initial begin
    ea = 0; ta = 0; len = 0; tval = 0; tdat = 0;
    for (int i = 0; i < 1024; i++) begin u_l2.mem[i] = $urandom; tmem[i] = 32'hDEAD0000 + 32'(i); end
    repeat (2) @(posedge clk); rst_n = 1;
    xfer(0, 32'h100, 32'h40, 100);   // L2 words 64..163 -> TCDM words 16..115
    for (int i = 0; i < 100; i++) begin
      checks++; if (tmem[16 + i] !== u_l2.mem[64 + i]) begin failures++; $display("FAIL in %0d", i); end
    end
    checks++; if (tmem[15] !== 32'hDEAD000F || tmem[116] !== 32'hDEAD0074) begin failures++; $display("FAIL overrun"); end
    for (int i = 0; i < 50; i++) tmem[200 + i] = 32'hA0000000 + 32'(i);
    xfer(1, 32'h800, 32'h320, 50);   // TCDM words 200..249 -> L2 words 512..561
    repeat (5) @(negedge clk);
    for (int i = 0; i < 50; i++) begin
      checks++; if (u_l2.mem[512 + i] !== 32'hA0000000 + 32'(i)) begin failures++; $display("FAIL out %0d", i); end
    end
    checks++; if (ndone != 2) begin failures++; $display("FAIL done pulses %0d", ndone); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
