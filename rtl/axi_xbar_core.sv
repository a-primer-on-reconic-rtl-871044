// axi_xbar_core -- NM x NS AXI4 crossbar with one transaction in flight per
// subordinate and direction.
//
// The address decode is done by the instantiating module, which supplies for
// every manager the index of the subordinate its pending AW and AR target
// (aw_sel / ar_sel). Each subordinate port has an independent write arbiter
// and read arbiter. An idle arbiter grants, round robin, one manager whose
// request targets it and that has no other transaction of that direction in
// flight; it then forwards that manager's AW (or AR) once, its W beats up to
// WLAST, and routes the B response (or the R beats up to RLAST) back, after
// which it frees itself. The grant costs one clock; after it the channels are
// combinational paths. Different subordinates serve different managers at the
// same time, so e.g. a host-memory read and a device-memory write proceed in
// parallel. IDs pass through unchanged because responses are routed by the
// grant, not by ID. The paper names the crossbars but not their insides; the
// one-transaction-per-port scheme is this design's simplest choice.
module axi_xbar_core
  import reconic_pkg::*;
#(
  parameter int unsigned NM = 2,
  parameter int unsigned NS = 2,
  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1,
  localparam int unsigned SW = (NS > 1) ? $clog2(NS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  axi_req_t          m_req  [NM],
  output axi_resp_t         m_resp [NM],
  input  logic [SW-1:0]     aw_sel [NM],
  input  logic [SW-1:0]     ar_sel [NM],
  output axi_req_t          s_req  [NS],
  input  axi_resp_t         s_resp [NS]
);
  // per-subordinate write state
  logic          w_busy  [NS];
  logic [MW-1:0] w_owner [NS];
  logic          aw_done [NS];
  logic          w_done  [NS];
  logic [MW-1:0] w_rr    [NS];
  // per-subordinate read state
  logic          r_busy  [NS];
  logic [MW-1:0] r_owner [NS];
  logic          ar_done [NS];
  logic [MW-1:0] r_rr    [NS];
  // per-manager "has a transaction in flight"
  logic          m_wact  [NM];
  logic          m_ract  [NM];

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      m_wact[m] = 1'b0;
      m_ract[m] = 1'b0;
      for (int s = 0; s < NS; s++) begin
        if (w_busy[s] && w_owner[s] == MW'(m)) m_wact[m] = 1'b1;
        if (r_busy[s] && r_owner[s] == MW'(m)) m_ract[m] = 1'b1;
      end
    end
  end

  // ---------------- subordinate-side requests ----------------
  always_comb begin
    for (int s = 0; s < NS; s++) begin
      s_req[s] = '0;
      if (w_busy[s]) begin
        s_req[s].aw       = m_req[w_owner[s]].aw;
        s_req[s].aw_valid = m_req[w_owner[s]].aw_valid && !aw_done[s];
        s_req[s].w        = m_req[w_owner[s]].w;
        s_req[s].w_valid  = m_req[w_owner[s]].w_valid && !w_done[s];
        s_req[s].b_ready  = m_req[w_owner[s]].b_ready;
      end
      if (r_busy[s]) begin
        s_req[s].ar       = m_req[r_owner[s]].ar;
        s_req[s].ar_valid = m_req[r_owner[s]].ar_valid && !ar_done[s];
        s_req[s].r_ready  = m_req[r_owner[s]].r_ready;
      end
    end
  end

  // ---------------- manager-side responses ----------------
  always_comb begin
    for (int m = 0; m < NM; m++) m_resp[m] = '0;
    for (int s = 0; s < NS; s++) begin
      if (w_busy[s]) begin
        m_resp[w_owner[s]].aw_ready = s_resp[s].aw_ready && !aw_done[s];
        m_resp[w_owner[s]].w_ready  = s_resp[s].w_ready && !w_done[s];
        m_resp[w_owner[s]].b        = s_resp[s].b;
        m_resp[w_owner[s]].b_valid  = s_resp[s].b_valid;
      end
      if (r_busy[s]) begin
        m_resp[r_owner[s]].ar_ready = s_resp[s].ar_ready && !ar_done[s];
        m_resp[r_owner[s]].r        = s_resp[s].r;
        m_resp[r_owner[s]].r_valid  = s_resp[s].r_valid;
      end
    end
  end

  // ---------------- arbitration and tracking ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NS; s++) begin
        w_busy[s] <= 1'b0; w_owner[s] <= '0; aw_done[s] <= 1'b0; w_done[s] <= 1'b0; w_rr[s] <= '0;
        r_busy[s] <= 1'b0; r_owner[s] <= '0; ar_done[s] <= 1'b0; r_rr[s] <= '0;
      end
    end else begin
      for (int s = 0; s < NS; s++) begin
        // ---- write side ----
        if (!w_busy[s]) begin
          for (int k = NM; k >= 1; k--) begin
            automatic int m = (int'(w_rr[s]) + k) % NM;
            if (m_req[m].aw_valid && aw_sel[m] == SW'(s) && !m_wact[m]) begin
              w_busy[s]  <= 1'b1;
              w_owner[s] <= MW'(m);
              w_rr[s]    <= MW'(m);
            end
          end
          aw_done[s] <= 1'b0;
          w_done[s]  <= 1'b0;
        end else begin
          if (s_req[s].aw_valid && s_resp[s].aw_ready) aw_done[s] <= 1'b1;
          if (s_req[s].w_valid && s_resp[s].w_ready && s_req[s].w.last) w_done[s] <= 1'b1;
          if (s_resp[s].b_valid && s_req[s].b_ready) w_busy[s] <= 1'b0;
        end
        // ---- read side ----
        if (!r_busy[s]) begin
          for (int k = NM; k >= 1; k--) begin
            automatic int m = (int'(r_rr[s]) + k) % NM;
            if (m_req[m].ar_valid && ar_sel[m] == SW'(s) && !m_ract[m]) begin
              r_busy[s]  <= 1'b1;
              r_owner[s] <= MW'(m);
              r_rr[s]    <= MW'(m);
            end
          end
          ar_done[s] <= 1'b0;
        end else begin
          if (s_req[s].ar_valid && s_resp[s].ar_ready) ar_done[s] <= 1'b1;
          if (s_resp[s].r_valid && s_req[s].r_ready && s_resp[s].r.last) r_busy[s] <= 1'b0;
        end
      end
    end
  end
endmodule
