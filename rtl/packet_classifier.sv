// packet_classifier -- splits received Ethernet frames into RDMA (RoCEv2) and
// non-RDMA streams.
//
// Every frame from the MAC is inspected on its first 64-byte beat, which
// holds the Ethernet, IP, UDP and RoCEv2 base transport headers (BTH). A frame
// is RDMA when it is IPv4 (EtherType 0x0800, IHL 5, protocol 17) or IPv6
// (EtherType 0x86DD, next header 17) carrying UDP with destination port
// roce_port (4791 by default, the registered RoCEv2 port). The decision taken
// on the first beat steers the whole frame to rdma_out, with metadata giving
// the BTH opcode and destination QP, or to nonrdma_out, which the shell sends
// to the host through QDMA. With enable low every frame is non-RDMA.
// rdma_meta accompanies every beat of an RDMA frame; for IPv6 frames the
// destination QP lies beyond the first 64 bytes and is valid from the
// second beat on (such frames are always at least 78 bytes long).
//
// The paper gives the function (RDMA vs non-RDMA, headers parsed, RDMA to the
// RDMA engine, the rest to the host) and implements it in P4; this RTL parser
// is this design's own: no VLAN tags, no IPv4 options (such frames are
// non-RDMA), byte 0 of the frame in tdata[7:0].
//
// Timing: one register stage; a beat appears on an output one clock after it
// is accepted. Input ready follows the ready of the output the held beat is
// going to, so there are no bubbles when the outputs are ready. Packet
// counters count frames at their last beat.
module packet_classifier
  import reconic_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // configuration (from the shell registers)
  input  logic        enable,
  input  logic [15:0] roce_port,
  // from the MAC
  input  axis_t       rx_in,
  output logic        rx_in_ready,
  // RDMA traffic, towards the RDMA engine
  output axis_t       rdma_out,
  output pc_meta_t    rdma_meta,
  input  logic        rdma_out_ready,
  // non-RDMA traffic, towards the host
  output axis_t       nonrdma_out,
  input  logic        nonrdma_out_ready,
  // statistics
  output logic [31:0] rdma_pkts,
  output logic [31:0] nonrdma_pkts
);
  // d[8*b+7:8*b] is byte b of the frame.
  // Header decode of a first beat.
  function automatic pc_meta_t classify(input logic [AXIS_DATA_W-1:0] d,
                                        input logic en, input logic [15:0] port);
    pc_meta_t    r;
    logic [15:0] etype;
    etype = {d[103:96], d[111:104]};
    r = '0;
    if (etype == ETHTYPE_IPV4 && d[119:112] == 8'h45 && d[191:184] == IPPROTO_UDP
        && {d[295:288], d[303:296]} == port) begin
      // BTH at byte 42: opcode, flags, pkey(2), reserved, dest QP (3)
      r.is_rdma     = en;
      r.bth_opcode  = d[343:336];
      r.bth_dest_qp = {d[383:376], d[391:384], d[399:392]};
    end else if (etype == ETHTYPE_IPV6 && d[167:160] == IPPROTO_UDP
                 && {d[455:448], d[463:456]} == port) begin
      // BTH at byte 62
      r.is_rdma     = en;
      r.bth_opcode  = d[503:496];
      // the destination QP (bytes 67..69) lies in the second beat; it is
      // filled in there (see below)
    end
    if (!r.is_rdma) r = '0;
    return r;
  endfunction

  logic     in_frame;      // a frame is in progress (its first beat was taken)
  logic     second;        // the next beat is the frame's second beat
  logic     is_v6;         // frame in progress is IPv6
  pc_meta_t cur_meta;      // decision of the frame in progress
  axis_t    hold;          // output register
  pc_meta_t hold_meta;

  wire      hold_ready = hold_meta.is_rdma ? rdma_out_ready : nonrdma_out_ready;
  wire      hold_free  = !hold.tvalid || hold_ready;
  pc_meta_t in_meta;

  always_comb begin
    in_meta = in_frame ? cur_meta : classify(rx_in.tdata, enable, roce_port);
    // IPv6: BTH destination QP = frame bytes 67..69 = bytes 3..5 of beat 2
    if (in_frame && second && is_v6 && cur_meta.is_rdma)
      in_meta.bth_dest_qp = {rx_in.tdata[31:24], rx_in.tdata[39:32], rx_in.tdata[47:40]};
  end

  assign rx_in_ready = hold_free;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_frame     <= 1'b0;
      second       <= 1'b0;
      is_v6        <= 1'b0;
      cur_meta     <= '0;
      hold         <= '0;
      hold_meta    <= '0;
      rdma_pkts    <= '0;
      nonrdma_pkts <= '0;
    end else begin
      if (hold_free) begin
        hold.tvalid <= rx_in.tvalid;
        if (rx_in.tvalid) begin
          hold      <= rx_in;
          hold_meta <= in_meta;
          cur_meta  <= in_meta;
          in_frame  <= !rx_in.tlast;
          second    <= !in_frame;
          if (!in_frame) is_v6 <= (rx_in.tdata[103:96] == ETHTYPE_IPV6[15:8])
                               && (rx_in.tdata[111:104] == ETHTYPE_IPV6[7:0]);
        end
      end
      if (hold.tvalid && hold_ready && hold.tlast) begin
        if (hold_meta.is_rdma) rdma_pkts    <= rdma_pkts + 1;
        else                   nonrdma_pkts <= nonrdma_pkts + 1;
      end
    end
  end

  always_comb begin
    rdma_out           = hold;
    rdma_out.tvalid    = hold.tvalid && hold_meta.is_rdma;
    rdma_meta          = hold_meta;
    nonrdma_out        = hold;
    nonrdma_out.tvalid = hold.tvalid && !hold_meta.is_rdma;
  end
endmodule
