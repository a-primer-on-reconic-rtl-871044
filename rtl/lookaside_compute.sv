// lookaside_compute -- the lookaside compute (LC) block: NK kernels, each with
// a control FIFO and a status FIFO, a register interface for the host and a
// shared AXI4 port to memory.
//
// The host starts a kernel by writing a control message, word by word, into
// that kernel's control FIFO over AXI4-Lite. A kernel starts as soon as its
// control FIFO is not empty, reads its arguments, does its work on memory
// through AXI4, and writes a status word into its status FIFO. The host learns
// of completion either by polling a completion register (bit 0 is set while
// the status FIFO holds a word) or by the interrupt irq, raised while any
// enabled kernel's status FIFO is not empty. This structure is the paper's;
// the register map, FIFO depths and the one-port memory sharing are this
// design's. The kernels instantiated are matrix-multiplication kernels
// (mm_kernel), the paper's lookaside example.
//
// Register map (32-bit registers, byte addresses, kernel k at k*0x20):
//   k*0x20+0x00 CTRL        W: push a word into the control FIFO (SLVERR if
//                           full)  R: free control FIFO slots
//   k*0x20+0x04 STATUS      R: pop and return the head status word (0 if empty)
//   k*0x20+0x08 STAT_COUNT  R: words in the status FIFO
//   k*0x20+0x0C COMPLETION  R: bit 0 status FIFO not empty, bit 1 kernel busy
//   0x200       IRQ_ENABLE  R/W: one enable bit per kernel
//   0x204       IRQ_PENDING R: per kernel, status FIFO not empty
// AXI4-Lite handling: one access at a time; a write needs AW and W together
// and answers on B the next clock; a read answers on R the next clock.
module lookaside_compute
  import reconic_pkg::*;
#(
  parameter int unsigned NK         = 1,
  parameter int unsigned N          = 16,
  parameter int unsigned CTRL_DEPTH = 16,
  parameter int unsigned STAT_DEPTH = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  axil_req_t  cfg_req,
  output axil_resp_t cfg_resp,
  output axi_req_t   mem_req,
  input  axi_resp_t  mem_resp,
  output logic       irq
);
  localparam int unsigned CW = $clog2(CTRL_DEPTH + 1);
  localparam int unsigned SW = $clog2(STAT_DEPTH + 1);

  logic [31:0]   c_wdata;
  logic          c_push   [NK];
  logic [31:0]   c_rdata  [NK];
  logic          c_pop    [NK];
  logic          c_full   [NK];
  logic          c_empty  [NK];
  logic [CW-1:0] c_count  [NK];
  logic [31:0]   s_wdata  [NK];
  logic          s_push   [NK];
  logic [31:0]   s_rdata  [NK];
  logic          s_pop    [NK];
  logic          s_full   [NK];
  logic          s_empty  [NK];
  logic [SW-1:0] s_count  [NK];
  logic          k_busy   [NK];
  axi_req_t      k_req    [NK];
  axi_resp_t     k_resp   [NK];
  logic [NK-1:0] irq_en, pending;

  for (genvar k = 0; k < NK; k++) begin : g_kernel
    logic [15:0] cycles;
    sync_fifo #(.WIDTH(32), .DEPTH(CTRL_DEPTH)) u_ctrl_fifo (
      .clk, .rst_n, .wr_en(c_push[k]), .wr_data(c_wdata), .rd_en(c_pop[k]),
      .rd_data(c_rdata[k]), .full(c_full[k]), .empty(c_empty[k]), .count(c_count[k])
    );
    sync_fifo #(.WIDTH(32), .DEPTH(STAT_DEPTH)) u_stat_fifo (
      .clk, .rst_n, .wr_en(s_push[k]), .wr_data(s_wdata[k]), .rd_en(s_pop[k]),
      .rd_data(s_rdata[k]), .full(s_full[k]), .empty(s_empty[k]), .count(s_count[k])
    );
    mm_kernel #(.N(N), .AXI_ID(AXI_ID_W'(k))) u_kernel (
      .clk, .rst_n,
      .ctrl_data(c_rdata[k]), .ctrl_empty(c_empty[k]), .ctrl_pop(c_pop[k]),
      .stat_data(s_wdata[k]), .stat_full(s_full[k]), .stat_push(s_push[k]),
      .m_req(k_req[k]), .m_resp(k_resp[k]),
      .busy(k_busy[k]), .compute_cycles(cycles)
    );
    assign pending[k] = !s_empty[k];
  end

  // ---------------- kernels share one memory port ----------------
  logic [0:0] k_sel [NK];
  axi_req_t   o_req  [1];
  axi_resp_t  o_resp [1];
  always_comb for (int k = 0; k < NK; k++) k_sel[k] = 1'b0;
  axi_xbar_core #(.NM(NK), .NS(1)) u_mem_share (
    .clk, .rst_n, .m_req(k_req), .m_resp(k_resp),
    .aw_sel(k_sel), .ar_sel(k_sel), .s_req(o_req), .s_resp(o_resp)
  );
  assign mem_req   = o_req[0];
  assign o_resp[0] = mem_resp;

  assign irq = |(pending & irq_en);

  // ---------------- AXI4-Lite register interface ----------------
  logic        b_valid_q, r_valid_q;
  logic [1:0]  b_resp_q, r_resp_q;
  logic [31:0] r_data_q;
  wire        wr_go  = cfg_req.aw_valid && cfg_req.w_valid && !b_valid_q;
  wire        rd_go  = cfg_req.ar_valid && !r_valid_q;
  wire [11:0] waddr  = cfg_req.aw_addr[11:0];
  wire [11:0] raddr  = cfg_req.ar_addr[11:0];

  function automatic int kidx(input logic [11:0] a);
    return int'(a[11:5]);
  endfunction

  assign c_wdata = cfg_req.w_data;

  always_comb begin
    cfg_resp          = '0;
    cfg_resp.aw_ready = wr_go;
    cfg_resp.b_valid  = b_valid_q;
    cfg_resp.b_resp   = b_resp_q;
    cfg_resp.r_valid  = r_valid_q;
    cfg_resp.r_resp   = r_resp_q;
    cfg_resp.r_data   = r_data_q;
    cfg_resp.w_ready  = wr_go;
    cfg_resp.ar_ready = rd_go;
    for (int k = 0; k < NK; k++) begin
      c_push[k] = wr_go && waddr < 12'h200 && kidx(waddr) == k && waddr[4:0] == 5'h00 && !c_full[k];
      s_pop[k]  = rd_go && raddr < 12'h200 && kidx(raddr) == k && raddr[4:0] == 5'h04 && !s_empty[k];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_valid_q <= 1'b0;
      b_resp_q  <= AXI_RESP_OKAY;
      r_valid_q <= 1'b0;
      r_data_q  <= '0;
      r_resp_q  <= AXI_RESP_OKAY;
      irq_en           <= '0;
    end else begin
      if (b_valid_q && cfg_req.b_ready) b_valid_q <= 1'b0;
      if (r_valid_q && cfg_req.r_ready) r_valid_q <= 1'b0;
      if (wr_go) begin
        b_valid_q <= 1'b1;
        b_resp_q  <= AXI_RESP_OKAY;
        if (waddr == 12'h200) irq_en <= cfg_req.w_data[NK-1:0];
        else if (waddr < 12'h200 && kidx(waddr) < NK && waddr[4:0] == 5'h00) begin
          if (c_full[kidx(waddr)]) b_resp_q <= AXI_RESP_SLVERR;
        end else b_resp_q <= AXI_RESP_DECERR;
      end
      if (rd_go) begin
        r_valid_q <= 1'b1;
        r_resp_q  <= AXI_RESP_OKAY;
        r_data_q  <= '0;
        if (raddr == 12'h200)      r_data_q <= 32'(irq_en);
        else if (raddr == 12'h204) r_data_q <= 32'(pending);
        else if (raddr < 12'h200 && kidx(raddr) < NK) begin
          case (raddr[4:0])
            5'h00: r_data_q <= 32'(CTRL_DEPTH) - 32'(c_count[kidx(raddr)]);
            5'h04: r_data_q <= s_empty[kidx(raddr)] ? 32'h0 : s_rdata[kidx(raddr)];
            5'h08: r_data_q <= 32'(s_count[kidx(raddr)]);
            5'h0C: r_data_q <= {30'h0, k_busy[kidx(raddr)], !s_empty[kidx(raddr)]};
            default: r_resp_q <= AXI_RESP_DECERR;
          endcase
        end else r_resp_q <= AXI_RESP_DECERR;
      end
    end
  end
endmodule
