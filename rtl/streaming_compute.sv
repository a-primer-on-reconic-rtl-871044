// streaming_compute -- the streaming compute (SC) slot on the receive path,
// holding a network-telemetry kernel.
//
// In the shell the SC block sits between packet classification and its two
// consumers: the RDMA receive stream continues to the RDMA engine and the
// non-RDMA receive stream to the host (QDMA). The paper leaves the kernel to
// the user (P4, HLS or RTL) and names packet processing and network telemetry
// as its uses. The kernel built here is a telemetry one: each lane passes its
// frames through a register stage and counts frames and payload bytes (the
// set tkeep bits of every beat). When drop_nonrdma is set, the non-RDMA lane
// discards frames instead of forwarding them (a simple filtering example,
// counted in nonrdma_dropped). Counters and the drop bit are reached through
// the shell's AXI4-Lite registers. Kernel and register set are this design's.
//
// Timing: one clock from input to output on each lane, full throughput.
module streaming_compute
  import reconic_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        drop_nonrdma,
  // RDMA lane
  input  axis_t       rdma_in,
  input  pc_meta_t    rdma_meta_in,
  output logic        rdma_in_ready,
  output axis_t       rdma_out,
  output pc_meta_t    rdma_meta_out,
  input  logic        rdma_out_ready,
  // non-RDMA lane
  input  axis_t       nonrdma_in,
  output logic        nonrdma_in_ready,
  output axis_t       nonrdma_out,
  input  logic        nonrdma_out_ready,
  // telemetry
  output logic [31:0] rdma_frames,
  output logic [47:0] rdma_bytes,
  output logic [31:0] nonrdma_frames,
  output logic [47:0] nonrdma_bytes,
  output logic [31:0] nonrdma_dropped
);
  function automatic logic [6:0] keep_bytes(input logic [AXIS_KEEP_W-1:0] k);
    logic [6:0] n;
    n = '0;
    for (int i = 0; i < AXIS_KEEP_W; i++) n += 7'(k[i]);
    return n;
  endfunction

  // ---------------- RDMA lane ----------------
  axis_t    r_hold;
  pc_meta_t r_meta;
  assign rdma_in_ready = !r_hold.tvalid || rdma_out_ready;
  assign rdma_out      = r_hold;
  assign rdma_meta_out = r_meta;

  // ---------------- non-RDMA lane ----------------
  axis_t n_hold;
  logic  n_dropping;   // the current non-RDMA frame is being discarded
  assign nonrdma_in_ready = !n_hold.tvalid || nonrdma_out_ready;
  assign nonrdma_out      = n_hold;

  wire r_acc = rdma_in.tvalid && rdma_in_ready;
  wire n_acc = nonrdma_in.tvalid && nonrdma_in_ready;
  // frame-drop decision is taken on the first beat and held to the last
  logic n_first;
  wire  n_drop_beat = n_first ? drop_nonrdma : n_dropping;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_hold <= '0; r_meta <= '0;
      n_hold <= '0; n_dropping <= 1'b0; n_first <= 1'b1;
      rdma_frames <= '0; rdma_bytes <= '0;
      nonrdma_frames <= '0; nonrdma_bytes <= '0; nonrdma_dropped <= '0;
    end else begin
      if (rdma_in_ready) begin
        r_hold.tvalid <= rdma_in.tvalid;
        if (rdma_in.tvalid) begin
          r_hold <= rdma_in;
          r_meta <= rdma_meta_in;
        end
      end
      if (r_acc) begin
        rdma_bytes <= rdma_bytes + 48'(keep_bytes(rdma_in.tkeep));
        if (rdma_in.tlast) rdma_frames <= rdma_frames + 1;
      end

      if (nonrdma_in_ready) begin
        n_hold.tvalid <= nonrdma_in.tvalid && !n_drop_beat;
        if (nonrdma_in.tvalid && !n_drop_beat) n_hold <= nonrdma_in;
      end
      if (n_acc) begin
        n_first    <= nonrdma_in.tlast;
        n_dropping <= n_drop_beat && !nonrdma_in.tlast;
        if (n_drop_beat) begin
          if (nonrdma_in.tlast) nonrdma_dropped <= nonrdma_dropped + 1;
        end else begin
          nonrdma_bytes <= nonrdma_bytes + 48'(keep_bytes(nonrdma_in.tkeep));
          if (nonrdma_in.tlast) nonrdma_frames <= nonrdma_frames + 1;
        end
      end
    end
  end
endmodule
