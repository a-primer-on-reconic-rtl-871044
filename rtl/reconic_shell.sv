// reconic_shell -- the RecoNIC hardware shell: an FPGA SmartNIC data path that
// lets an RDMA engine, the host and on-card compute kernels share the network
// and one device memory.
//
// Receive: frames from the MAC pass the packet classifier, which separates
// RoCEv2 (RDMA) frames from all others; both streams pass the streaming
// compute slot; RDMA frames then go to the RDMA engine, the others to the host
// through QDMA. Transmit: the arbiter merges the RDMA engine's frames with the
// host's frames into the MAC. Memory: the RDMA engine's five AXI4 managers go
// through sys_crossbar, which sends an address tagged 0xA35 in its top 12 bits
// to device memory (through mem_crossbar) and any other address to host memory
// (QDMA slave bridge). mem_crossbar also serves the host's DMA into device
// memory and the lookaside compute block. Control: the host's AXI4-Lite
// accesses are spread by axil_crossbar to the RDMA engine, the MAC, the
// lookaside compute block and the shell registers.
//
// The RDMA engine (a vendor RoCEv2 IP), the QDMA PCIe subsystem, the MAC and
// the DDR4 memory with its controller are not part of this RTL; their
// connections are the ports below. Block structure and connections follow the
// paper's platform diagram; bus widths, register maps and arbitration are
// this design's (see each block). One clock domain, active-low async reset.
module reconic_shell
  import reconic_pkg::*;
#(
  parameter int unsigned N_RDMA_AXI = 5,    // RDMA engine AXI4 managers
  parameter int unsigned LC_KERNELS = 1,    // kernels in lookaside compute
  parameter int unsigned MM_N       = 16    // systolic array size
) (
  input  logic       clk,
  input  logic       rst_n,
  // ---- MAC subsystem ----
  input  axis_t      mac_rx,
  output logic       mac_rx_ready,
  output axis_t      mac_tx,
  input  logic       mac_tx_ready,
  output axil_req_t  mac_cfg_req,
  input  axil_resp_t mac_cfg_resp,
  // ---- RDMA engine ----
  output axis_t      rdma_rx,
  output pc_meta_t   rdma_rx_meta,
  input  logic       rdma_rx_ready,
  input  axis_t      rdma_tx,
  output logic       rdma_tx_ready,
  input  axi_req_t   rdma_m_req  [N_RDMA_AXI],
  output axi_resp_t  rdma_m_resp [N_RDMA_AXI],
  output axil_req_t  rdma_cfg_req,
  input  axil_resp_t rdma_cfg_resp,
  // ---- QDMA subsystem ----
  output axis_t      qdma_rx,          // non-RDMA frames to the host
  input  logic       qdma_rx_ready,
  input  axis_t      qdma_tx,          // non-RDMA frames from the host
  output logic       qdma_tx_ready,
  input  axi_req_t   qdma_mm_req,      // host access to device memory
  output axi_resp_t  qdma_mm_resp,
  output axi_req_t   qdma_bridge_req,  // shell access to host memory
  input  axi_resp_t  qdma_bridge_resp,
  input  axil_req_t  qdma_cfg_req,     // host register accesses
  output axil_resp_t qdma_cfg_resp,
  // ---- device memory controller ----
  output axi_req_t   ddr_req,
  input  axi_resp_t  ddr_resp,
  // ---- misc ----
  output logic       lc_irq,
  output logic [31:0] host_txn_count,
  output logic [31:0] dev_txn_count
);
  // ---------------- control crossbar ----------------
  axil_req_t  cfg_req  [4];
  axil_resp_t cfg_resp [4];
  axil_crossbar #(.NS(4)) u_ctrl_xbar (
    .clk, .rst_n, .m_req(qdma_cfg_req), .m_resp(qdma_cfg_resp),
    .s_req(cfg_req), .s_resp(cfg_resp)
  );
  assign rdma_cfg_req = cfg_req[0];
  assign cfg_resp[0]  = rdma_cfg_resp;
  assign mac_cfg_req  = cfg_req[1];
  assign cfg_resp[1]  = mac_cfg_resp;

  // ---------------- receive path ----------------
  logic        pc_enable, sc_drop;
  logic [15:0] pc_port;
  logic [31:0] pc_rdma_pkts, pc_nonrdma_pkts;
  axis_t       pc_rdma, pc_nonrdma;
  pc_meta_t    pc_meta;
  logic        pc_rdma_ready, pc_nonrdma_ready;

  packet_classifier u_pc (
    .clk, .rst_n, .enable(pc_enable), .roce_port(pc_port),
    .rx_in(mac_rx), .rx_in_ready(mac_rx_ready),
    .rdma_out(pc_rdma), .rdma_meta(pc_meta), .rdma_out_ready(pc_rdma_ready),
    .nonrdma_out(pc_nonrdma), .nonrdma_out_ready(pc_nonrdma_ready),
    .rdma_pkts(pc_rdma_pkts), .nonrdma_pkts(pc_nonrdma_pkts)
  );

  logic [31:0] sc_rdma_frames, sc_nonrdma_frames, sc_dropped;
  logic [47:0] sc_rdma_bytes, sc_nonrdma_bytes;
  streaming_compute u_sc (
    .clk, .rst_n, .drop_nonrdma(sc_drop),
    .rdma_in(pc_rdma), .rdma_meta_in(pc_meta), .rdma_in_ready(pc_rdma_ready),
    .rdma_out(rdma_rx), .rdma_meta_out(rdma_rx_meta), .rdma_out_ready(rdma_rx_ready),
    .nonrdma_in(pc_nonrdma), .nonrdma_in_ready(pc_nonrdma_ready),
    .nonrdma_out(qdma_rx), .nonrdma_out_ready(qdma_rx_ready),
    .rdma_frames(sc_rdma_frames), .rdma_bytes(sc_rdma_bytes),
    .nonrdma_frames(sc_nonrdma_frames), .nonrdma_bytes(sc_nonrdma_bytes),
    .nonrdma_dropped(sc_dropped)
  );

  // ---------------- transmit path ----------------
  logic [31:0] tx_contention;
  tx_arbiter u_arb (
    .clk, .rst_n,
    .rdma_tx, .rdma_tx_ready,
    .nonrdma_tx(qdma_tx), .nonrdma_tx_ready(qdma_tx_ready),
    .tx_out(mac_tx), .tx_out_ready(mac_tx_ready),
    .contention_count(tx_contention)
  );

  shell_regs u_regs (
    .clk, .rst_n, .cfg_req(cfg_req[3]), .cfg_resp(cfg_resp[3]),
    .pc_enable, .pc_port, .sc_drop_nonrdma(sc_drop),
    .pc_rdma_pkts, .pc_nonrdma_pkts,
    .sc_rdma_frames, .sc_rdma_bytes, .sc_nonrdma_frames, .sc_nonrdma_bytes,
    .sc_nonrdma_dropped(sc_dropped), .tx_contention
  );

  // ---------------- memory path ----------------
  axi_req_t  sys2mem_req;
  axi_resp_t sys2mem_resp;
  sys_crossbar #(.NM(N_RDMA_AXI)) u_sys_xbar (
    .clk, .rst_n,
    .rdma_req(rdma_m_req), .rdma_resp(rdma_m_resp),
    .host_req(qdma_bridge_req), .host_resp(qdma_bridge_resp),
    .dev_req(sys2mem_req), .dev_resp(sys2mem_resp),
    .host_txn_count, .dev_txn_count
  );

  axi_req_t  lc_req;
  axi_resp_t lc_resp;
  lookaside_compute #(.NK(LC_KERNELS), .N(MM_N)) u_lc (
    .clk, .rst_n, .cfg_req(cfg_req[2]), .cfg_resp(cfg_resp[2]),
    .mem_req(lc_req), .mem_resp(lc_resp), .irq(lc_irq)
  );

  axi_req_t  mx_req  [3];
  axi_resp_t mx_resp [3];
  assign mx_req[0] = qdma_mm_req;
  assign mx_req[1] = sys2mem_req;
  assign mx_req[2] = lc_req;
  assign qdma_mm_resp = mx_resp[0];
  assign sys2mem_resp = mx_resp[1];
  assign lc_resp      = mx_resp[2];
  mem_crossbar #(.NM(3)) u_mem_xbar (
    .clk, .rst_n, .m_req(mx_req), .m_resp(mx_resp),
    .mem_req(ddr_req), .mem_resp(ddr_resp)
  );
endmodule
