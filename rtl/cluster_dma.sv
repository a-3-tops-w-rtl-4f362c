// cluster_dma: DMA between the second-level memory (L2) and the TCDM.
//
// Copies len_i 32-bit words, either from L2 into the TCDM (dir_i = 0) or
// back (dir_i = 1), while the cores keep computing: its TCDM port is one more
// master of the logarithmic interconnect. A transfer is started with a
// one-cycle start_i pulse while busy_o is low; done_o pulses when the last
// word is written. It moves one word at a time: read the source (hold the
// request until granted, then wait for rvalid), write the destination (hold
// until granted). Both ports use the same request/grant/rvalid handshake;
// the L2 side may answer with any latency. The word-by-word engine and the
// start/length interface are this design's choice: the published cluster
// names a dedicated DMA without describing it.
module cluster_dma
  import flexv_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        start_i,
  input  logic        dir_i,
  input  logic [31:0] ext_addr_i,
  input  logic [31:0] tcdm_addr_i,
  input  logic [15:0] len_i,
  output logic        busy_o,
  output logic        done_o,
  output tcdm_req_t   tcdm_req_o,
  input  logic        tcdm_gnt_i,
  input  tcdm_rsp_t   tcdm_rsp_i,
  output tcdm_req_t   ext_req_o,
  input  logic        ext_gnt_i,
  input  tcdm_rsp_t   ext_rsp_i
);

  typedef enum logic [1:0] {S_IDLE, S_RD, S_RWAIT, S_WR} state_e;

  state_e      state_q;
  logic        dir_q;
  logic [31:0] ext_q, tcdm_q, data_q;
  logic [15:0] left_q;
  tcdm_req_t   src_req, dst_req;
  tcdm_rsp_t   src_rsp;
  logic        src_gnt, dst_gnt;

  always_comb begin
    src_req       = '0;
    src_req.be    = 4'hF;
    src_req.req   = (state_q == S_RD);
    src_req.addr  = dir_q ? tcdm_q : ext_q;
    dst_req       = '0;
    dst_req.be    = 4'hF;
    dst_req.req   = (state_q == S_WR);
    dst_req.we    = 1'b1;
    dst_req.addr  = dir_q ? ext_q : tcdm_q;
    dst_req.wdata = data_q;
    tcdm_req_o = dir_q ? src_req : dst_req;
    ext_req_o  = dir_q ? dst_req : src_req;
    src_rsp    = dir_q ? tcdm_rsp_i : ext_rsp_i;
    src_gnt    = dir_q ? tcdm_gnt_i : ext_gnt_i;
    dst_gnt    = dir_q ? ext_gnt_i : tcdm_gnt_i;
  end

  assign busy_o = (state_q != S_IDLE);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      dir_q   <= 1'b0;
      ext_q   <= '0;
      tcdm_q  <= '0;
      data_q  <= '0;
      left_q  <= '0;
      done_o  <= 1'b0;
    end else begin
      done_o <= 1'b0;
      case (state_q)
        S_IDLE: if (start_i) begin
          dir_q  <= dir_i;
          ext_q  <= ext_addr_i;
          tcdm_q <= tcdm_addr_i;
          left_q <= len_i;
          if (len_i != 16'd0) state_q <= S_RD;
          else                done_o  <= 1'b1;
        end
        S_RD:    if (src_gnt)    state_q <= S_RWAIT;
        S_RWAIT: if (src_rsp.rvalid) begin
          data_q  <= src_rsp.rdata;
          state_q <= S_WR;
        end
        S_WR: if (dst_gnt) begin
          ext_q  <= ext_q + 32'd4;
          tcdm_q <= tcdm_q + 32'd4;
          left_q <= left_q - 16'd1;
          if (left_q == 16'd1) begin
            state_q <= S_IDLE;
            done_o  <= 1'b1;
          end else begin
            state_q <= S_RD;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Handshake rule on both ports: a request that is not granted stays up,
  // unchanged, in the next cycle.
  a_tcdm_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (tcdm_req_o.req && !tcdm_gnt_i) |=> (tcdm_req_o.req && $stable(tcdm_req_o)));
  a_ext_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (ext_req_o.req && !ext_gnt_i) |=> (ext_req_o.req && $stable(ext_req_o)));

endmodule
