// shell_regs -- AXI4-Lite registers of the packet classification and
// streaming compute blocks.
//
// Holds the classification enable and the UDP port that marks RoCEv2, the
// streaming-compute drop bit, and returns the packet/byte counters of both
// blocks and of the transmit arbiter. The control driver on the host reaches
// it through the control crossbar. The paper says these blocks are configured
// by the host over AXI4-Lite; the register set and map are this design's.
//
// Map (byte addresses, 32-bit registers):
//   0x00 PC_CTRL      R/W bit 0 classification enable (reset 1)
//   0x04 PC_PORT      R/W UDP destination port of RoCEv2 (reset 4791)
//   0x08 PC_RDMA      R   frames classified RDMA
//   0x0C PC_NONRDMA   R   frames classified non-RDMA
//   0x10 SC_CTRL      R/W bit 0 drop non-RDMA frames in streaming compute
//   0x14 SC_RDMA_FR   R   RDMA frames through streaming compute
//   0x18 SC_RDMA_BY   R   RDMA bytes (low 32 bits)
//   0x1C SC_NRDMA_FR  R   non-RDMA frames forwarded
//   0x20 SC_NRDMA_BY  R   non-RDMA bytes (low 32 bits)
//   0x24 SC_DROPPED   R   non-RDMA frames dropped
//   0x28 TX_CONTEND   R   transmit frames started while both inputs waited
// Timing: a write needs AW and W together and answers on B the next clock; a
// read answers on R the next clock.
module shell_regs
  import reconic_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  axil_req_t   cfg_req,
  output axil_resp_t  cfg_resp,
  output logic        pc_enable,
  output logic [15:0] pc_port,
  output logic        sc_drop_nonrdma,
  input  logic [31:0] pc_rdma_pkts,
  input  logic [31:0] pc_nonrdma_pkts,
  input  logic [31:0] sc_rdma_frames,
  input  logic [47:0] sc_rdma_bytes,
  input  logic [31:0] sc_nonrdma_frames,
  input  logic [47:0] sc_nonrdma_bytes,
  input  logic [31:0] sc_nonrdma_dropped,
  input  logic [31:0] tx_contention
);
  logic        b_valid_q, r_valid_q;
  logic [1:0]  b_resp_q, r_resp_q;
  logic [31:0] r_data_q;
  wire         wr_go = cfg_req.aw_valid && cfg_req.w_valid && !b_valid_q;
  wire         rd_go = cfg_req.ar_valid && !r_valid_q;
  wire [7:0]   waddr = cfg_req.aw_addr[7:0];
  wire [7:0]   raddr = cfg_req.ar_addr[7:0];

  always_comb begin
    cfg_resp          = '0;
    cfg_resp.aw_ready = wr_go;
    cfg_resp.w_ready  = wr_go;
    cfg_resp.ar_ready = rd_go;
    cfg_resp.b_valid  = b_valid_q;
    cfg_resp.b_resp   = b_resp_q;
    cfg_resp.r_valid  = r_valid_q;
    cfg_resp.r_resp   = r_resp_q;
    cfg_resp.r_data   = r_data_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_valid_q <= 1'b0; r_valid_q <= 1'b0;
      b_resp_q <= AXI_RESP_OKAY; r_resp_q <= AXI_RESP_OKAY; r_data_q <= '0;
      pc_enable <= 1'b1;
      pc_port   <= ROCEV2_UDP_PORT;
      sc_drop_nonrdma <= 1'b0;
    end else begin
      if (b_valid_q && cfg_req.b_ready) b_valid_q <= 1'b0;
      if (r_valid_q && cfg_req.r_ready) r_valid_q <= 1'b0;
      if (wr_go) begin
        b_valid_q <= 1'b1;
        b_resp_q  <= AXI_RESP_OKAY;
        case (waddr)
          8'h00: pc_enable       <= cfg_req.w_data[0];
          8'h04: pc_port         <= cfg_req.w_data[15:0];
          8'h10: sc_drop_nonrdma <= cfg_req.w_data[0];
          default: b_resp_q <= AXI_RESP_SLVERR;
        endcase
      end
      if (rd_go) begin
        r_valid_q <= 1'b1;
        r_resp_q  <= AXI_RESP_OKAY;
        case (raddr)
          8'h00: r_data_q <= {31'h0, pc_enable};
          8'h04: r_data_q <= {16'h0, pc_port};
          8'h08: r_data_q <= pc_rdma_pkts;
          8'h0C: r_data_q <= pc_nonrdma_pkts;
          8'h10: r_data_q <= {31'h0, sc_drop_nonrdma};
          8'h14: r_data_q <= sc_rdma_frames;
          8'h18: r_data_q <= sc_rdma_bytes[31:0];
          8'h1C: r_data_q <= sc_nonrdma_frames;
          8'h20: r_data_q <= sc_nonrdma_bytes[31:0];
          8'h24: r_data_q <= sc_nonrdma_dropped;
          8'h28: r_data_q <= tx_contention;
          default: begin r_data_q <= '0; r_resp_q <= AXI_RESP_SLVERR; end
        endcase
      end
    end
  end
endmodule
