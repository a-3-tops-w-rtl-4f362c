// tb_hw_sync_unit: cores arrive at a barrier at random times; nobody may be
// released before the last active core arrives, all must be released in the
// same cycle, waiting cores must lose their clock enable, and an inactive
// core must not hold the barrier.
module tb_hw_sync_unit;
  localparam int N = 4;
  logic clk = 0, rst_n = 0, rel; logic [N-1:0] active, req, go, en;
  int checks = 0, failures = 0, gated = 0;
  hw_sync_unit #(.N_CORES(N)) dut (.clk_i(clk), .rst_ni(rst_n), .active_i(active), .barrier_req_i(req),
                                   .barrier_go_o(go), .clk_en_o(en), .release_o(rel));
  always #5 clk = ~clk;
  // core models: wait a random time, raise req (held while waiting, like a
  // core sitting on WFI), drop it when released
  int delay [N];
  logic [N-1:0] done;
  always @(posedge clk) gated += $countones(~en & active);
  initial begin
    active = '1; req = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      int cyc;
      cyc = 0;
      active = (round % 5 == 4) ? 4'b1011 : 4'b1111;
      for (int c = 0; c < N; c++) delay[c] = $urandom_range(0, 12);
      done = ~active;
      while (done != '1) begin
        @(negedge clk);
        for (int c = 0; c < N; c++) req[c] = active[c] && !done[c] && cyc >= delay[c];
        #1;
        checks++;
        if (rel != (req == active)) begin failures++; $display("FAIL release round %0d cyc %0d", round, cyc); end
        if (rel) begin
          checks++;
          if (go != req || en != '1) begin failures++; $display("FAIL go/en at release"); end
          done = '1;
        end else begin
          for (int c = 0; c < N; c++) if (req[c] && cyc > delay[c]) begin
            checks++; if (en[c]) begin failures++; $display("FAIL core %0d not gated", c); end
          end
        end
        cyc++;
      end
      @(negedge clk); req = '0;
    end
    checks++; if (gated == 0) begin failures++; $display("FAIL no gating"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
