// l2_model: behavioural model of the host's L2 memory as seen by the
// cluster DMA (testbench only). Request/grant/rvalid handshake: the grant is
// withheld at random when RANDOM_GNT is set, read data returns LAT cycles
// after the grant. Words are addressed by byte address / 4.
module l2_model
  import flexv_pkg::*;
#(
  parameter int WORDS      = 4096,
  parameter int LAT        = 2,
  parameter bit RANDOM_GNT = 1'b1
) (
  input  logic      clk_i,
  input  tcdm_req_t req_i,
  output logic      gnt_o,
  output tcdm_rsp_t rsp_o
);
  logic [31:0] mem [WORDS];
  logic [LAT-1:0] vpipe = '0;
  logic [31:0] dpipe [LAT];
  logic gnt_ok = 1'b1;
  always_comb begin
    gnt_o        = req_i.req && gnt_ok;
    rsp_o.rvalid = vpipe[LAT-1];
    rsp_o.rdata  = dpipe[LAT-1];
  end
  always @(posedge clk_i) begin
    gnt_ok <= RANDOM_GNT ? 1'($urandom_range(0, 2) != 0) : 1'b1;
    vpipe <= {vpipe[LAT-2:0], gnt_o && !req_i.we};
    for (int i = LAT - 1; i > 0; i--) dpipe[i] <= dpipe[i-1];
    dpipe[0] <= mem[(req_i.addr >> 2) % WORDS];
    if (gnt_o && req_i.we) mem[(req_i.addr >> 2) % WORDS] <= req_i.wdata;
  end
endmodule
