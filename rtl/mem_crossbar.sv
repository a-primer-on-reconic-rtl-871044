// mem_crossbar -- shares the device memory (DDR4) among its three managers.
//
// Managers, as drawn in the shell block diagram: port 0 the QDMA AXI4-MM
// channel (host reads and writes device memory), port 1 the sys_crossbar
// (RDMA engine traffic to device memory), port 2 the lookaside compute block.
// All go to the single memory port. Managers may present either a full 64-bit
// address carrying the 0xA35 device tag or a plain memory offset: the address
// is reduced to its low MEM_ADDR_W bits (34 bits = 16 GB, the paper's DDR4
// size) before it reaches the memory controller. Arbitration is round robin
// with one read and one write in flight (axi_xbar_core), this design's choice.
// The upper AXI_ADDR_W - MEM_ADDR_W address bits of mem_req are therefore
// always zero; they stay in the port so the memory side keeps the shell's
// common AXI4 type.
module mem_crossbar
  import reconic_pkg::*;
#(
  parameter int unsigned NM         = 3,
  parameter int unsigned MEM_ADDR_W = DEV_MEM_ADDR_W
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axi_req_t  m_req  [NM],
  output axi_resp_t m_resp [NM],
  output axi_req_t  mem_req,
  input  axi_resp_t mem_resp
);
  logic [0:0] aw_sel [NM];
  logic [0:0] ar_sel [NM];
  axi_req_t   s_req  [1];
  axi_resp_t  s_resp [1];

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      aw_sel[m] = 1'b0;
      ar_sel[m] = 1'b0;
    end
  end

  axi_xbar_core #(.NM(NM), .NS(1)) u_core (
    .clk, .rst_n,
    .m_req, .m_resp,
    .aw_sel, .ar_sel,
    .s_req, .s_resp
  );

  always_comb begin
    mem_req = s_req[0];
    mem_req.aw.addr = {{(AXI_ADDR_W-MEM_ADDR_W){1'b0}}, s_req[0].aw.addr[MEM_ADDR_W-1:0]};
    mem_req.ar.addr = {{(AXI_ADDR_W-MEM_ADDR_W){1'b0}}, s_req[0].ar.addr[MEM_ADDR_W-1:0]};
  end
  assign s_resp[0] = mem_resp;
endmodule
