// axil_crossbar -- distributes the host's AXI4-Lite register accesses (from
// the QDMA PCIe AXI4-Lite port) to the shell's configurable blocks.
//
// Subordinate s owns the address window whose bits [LSB+RW-1:LSB] equal s
// (1 MB windows by default). In the shell: 0 RDMA engine, 1 MAC subsystem,
// 2 lookaside compute, 3 shell registers (packet classification and streaming
// compute). An address outside all windows is answered with DECERR by the
// crossbar itself. One write and one read are in flight at a time: the
// request is decoded and latched (one clock), its AW/W/AR are forwarded to the
// chosen window, the response is routed back, then the next request is taken.
// The paper shows these control connections as dashed lines from the QDMA
// subsystem; the window layout is this design's.
module axil_crossbar
  import reconic_pkg::*;
#(
  parameter int unsigned NS  = 4,
  parameter int unsigned LSB = 20,
  localparam int unsigned RW = (NS > 1) ? $clog2(NS) : 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  axil_req_t  m_req,
  output axil_resp_t m_resp,
  output axil_req_t  s_req  [NS],
  input  axil_resp_t s_resp [NS]
);
  // window index of an address, NS when it is outside all windows
  function automatic int unsigned decode(input logic [AXIL_ADDR_W-1:0] a);
    if (a[AXIL_ADDR_W-1:LSB] < (AXIL_ADDR_W-LSB)'(NS)) return int'(a[AXIL_ADDR_W-1:LSB]);
    return NS;
  endfunction

  typedef enum logic [1:0] {P_IDLE, P_FWD, P_RESP, P_ERR} phase_t;

  phase_t        wph, rph;
  logic [RW-1:0] wsel, rsel;
  logic          aw_done, w_done;
  logic [AXIL_ADDR_W-1:0] waddr_q, raddr_q;
  logic [AXIL_DATA_W-1:0] wdata_q;
  logic [3:0]             wstrb_q;

  always_comb begin
    for (int s = 0; s < NS; s++) s_req[s] = '0;
    m_resp = '0;
    // write
    m_resp.aw_ready = (wph == P_IDLE) && m_req.aw_valid && m_req.w_valid;
    m_resp.w_ready  = m_resp.aw_ready;
    if (wph == P_FWD || wph == P_RESP) begin
      s_req[wsel].aw_addr  = waddr_q;
      s_req[wsel].aw_valid = (wph == P_FWD) && !aw_done;
      s_req[wsel].w_data   = wdata_q;
      s_req[wsel].w_strb   = wstrb_q;
      s_req[wsel].w_valid  = (wph == P_FWD) && !w_done;
      s_req[wsel].b_ready  = (wph == P_RESP) && m_req.b_ready;
      m_resp.b_valid = (wph == P_RESP) && s_resp[wsel].b_valid;
      m_resp.b_resp  = s_resp[wsel].b_resp;
    end else if (wph == P_ERR) begin
      m_resp.b_valid = 1'b1;
      m_resp.b_resp  = AXI_RESP_DECERR;
    end
    // read
    m_resp.ar_ready = (rph == P_IDLE) && m_req.ar_valid;
    if (rph == P_FWD || rph == P_RESP) begin
      s_req[rsel].ar_addr  = raddr_q;
      s_req[rsel].ar_valid = (rph == P_FWD);
      s_req[rsel].r_ready  = (rph == P_RESP) && m_req.r_ready;
      m_resp.r_valid = (rph == P_RESP) && s_resp[rsel].r_valid;
      m_resp.r_data  = s_resp[rsel].r_data;
      m_resp.r_resp  = s_resp[rsel].r_resp;
    end else if (rph == P_ERR) begin
      m_resp.r_valid = 1'b1;
      m_resp.r_resp  = AXI_RESP_DECERR;
      m_resp.r_data  = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wph <= P_IDLE; rph <= P_IDLE; wsel <= '0; rsel <= '0;
      aw_done <= 1'b0; w_done <= 1'b0;
      waddr_q <= '0; raddr_q <= '0; wdata_q <= '0; wstrb_q <= '0;
    end else begin
      case (wph)
        P_IDLE: if (m_resp.aw_ready) begin
          waddr_q <= m_req.aw_addr;
          wdata_q <= m_req.w_data;
          wstrb_q <= m_req.w_strb;
          aw_done <= 1'b0;
          w_done  <= 1'b0;
          if (decode(m_req.aw_addr) < NS) begin
            wsel <= RW'(decode(m_req.aw_addr));
            wph  <= P_FWD;
          end else wph <= P_ERR;
        end
        P_FWD: begin
          automatic logic awd = aw_done || s_resp[wsel].aw_ready;
          automatic logic wd  = w_done  || s_resp[wsel].w_ready;
          aw_done <= awd;
          w_done  <= wd;
          if (awd && wd) wph <= P_RESP;
        end
        P_RESP: if (s_resp[wsel].b_valid && m_req.b_ready) wph <= P_IDLE;
        P_ERR:  if (m_req.b_ready) wph <= P_IDLE;
        default: wph <= P_IDLE;
      endcase
      case (rph)
        P_IDLE: if (m_resp.ar_ready) begin
          raddr_q <= m_req.ar_addr;
          if (decode(m_req.ar_addr) < NS) begin
            rsel <= RW'(decode(m_req.ar_addr));
            rph  <= P_FWD;
          end else rph <= P_ERR;
        end
        P_FWD:  if (s_resp[rsel].ar_ready) rph <= P_RESP;
        P_RESP: if (s_resp[rsel].r_valid && m_req.r_ready) rph <= P_IDLE;
        P_ERR:  if (m_req.r_ready) rph <= P_IDLE;
        default: rph <= P_IDLE;
      endcase
    end
  end
endmodule
