// sys_crossbar -- routes the RDMA engine's AXI4 managers to host memory or to
// device memory.
//
// The RDMA engine has five AXI4 managers (work-queue-element fetch, payload
// read/write and completion writes). Queue pairs and payload buffers can live
// in host memory or in device memory, and the address alone tells which: an
// address whose 12 most significant bits equal DEV_TAG (0xA35) belongs to the
// 16 GB device memory and goes to subordinate port 1, towards mem_crossbar;
// every other address goes to subordinate port 0, the QDMA slave bridge that
// reaches host memory over PCIe. The five managers and the 0xA35 tag are the
// paper's; the arbitration (round robin, one transaction per port and
// direction, one clock to grant) is axi_xbar_core's and this design's own.
module sys_crossbar
  import reconic_pkg::*;
#(
  parameter int unsigned NM      = 5,
  parameter int unsigned TAG_W   = DEV_MSB_W,
  parameter logic [TAG_W-1:0] DEV_TAG = TAG_W'(DEV_MSB_TAG)
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axi_req_t  rdma_req  [NM],
  output axi_resp_t rdma_resp [NM],
  output axi_req_t  host_req,      // to QDMA slave bridge (host memory)
  input  axi_resp_t host_resp,
  output axi_req_t  dev_req,       // to mem_crossbar (device memory)
  input  axi_resp_t dev_resp,
  output logic [31:0] host_txn_count,  // transactions routed to host memory
  output logic [31:0] dev_txn_count    // transactions routed to device memory
);
  localparam int unsigned PORT_HOST = 0;
  localparam int unsigned PORT_DEV  = 1;

  logic [0:0] aw_sel [NM];
  logic [0:0] ar_sel [NM];
  axi_req_t   s_req  [2];
  axi_resp_t  s_resp [2];

  function automatic logic is_dev(input logic [AXI_ADDR_W-1:0] a);
    return a[AXI_ADDR_W-1 -: TAG_W] == DEV_TAG;
  endfunction

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      aw_sel[m] = is_dev(rdma_req[m].aw.addr) ? 1'(PORT_DEV) : 1'(PORT_HOST);
      ar_sel[m] = is_dev(rdma_req[m].ar.addr) ? 1'(PORT_DEV) : 1'(PORT_HOST);
    end
  end

  axi_xbar_core #(.NM(NM), .NS(2)) u_core (
    .clk, .rst_n,
    .m_req(rdma_req), .m_resp(rdma_resp),
    .aw_sel, .ar_sel,
    .s_req, .s_resp
  );

  assign host_req  = s_req[PORT_HOST];
  assign dev_req   = s_req[PORT_DEV];
  assign s_resp[PORT_HOST] = host_resp;
  assign s_resp[PORT_DEV]  = dev_resp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      host_txn_count <= '0;
      dev_txn_count  <= '0;
    end else begin
      host_txn_count <= host_txn_count
                        + 32'(host_req.aw_valid && host_resp.aw_ready)
                        + 32'(host_req.ar_valid && host_resp.ar_ready);
      dev_txn_count  <= dev_txn_count
                        + 32'(dev_req.aw_valid && dev_resp.aw_ready)
                        + 32'(dev_req.ar_valid && dev_resp.ar_ready);
    end
  end
endmodule
