// tb_frames_pkg -- Ethernet frame builder for testbenches.
//
// make_frame builds the bytes of a frame of the given kind and length:
// RoCEv2 over IPv4 or IPv6 (UDP destination port 4791, with a BTH carrying
// the given opcode and destination QP), TCP over IPv4, UDP over IPv4 to
// another port, and ARP. Payload bytes are pseudo-random from the seed.
// beat_of cuts a frame into 64-byte AXI4-Stream beats (byte 0 in tdata[7:0]).
package tb_frames_pkg;
  import reconic_pkg::*;

  typedef enum int {K_ROCE4, K_ROCE6, K_TCP4, K_UDP4, K_ARP} kind_t;
  typedef logic [7:0] bytes_t[$];

  function automatic bit is_rdma_kind(kind_t k);
    return k == K_ROCE4 || k == K_ROCE6;
  endfunction

  function automatic bytes_t make_frame(kind_t k, int len, logic [7:0] opcode,
                                        logic [23:0] qp, int seed);
    bytes_t f;
    int l4;
    for (int i = 0; i < len; i++) f.push_back(8'((seed * 131 + i * 7) ^ (i >> 3)));
    for (int i = 0; i < 12; i++) f[i] = 8'(16 * i + 1);                 // MACs
    case (k)
      K_ROCE4, K_TCP4, K_UDP4: begin
        f[12] = 8'h08; f[13] = 8'h00; f[14] = 8'h45;
        f[23] = (k == K_TCP4) ? 8'd6 : 8'd17;
        l4 = 34;
      end
      K_ROCE6: begin
        f[12] = 8'h86; f[13] = 8'hDD; f[14] = 8'h60; f[20] = 8'd17;
        l4 = 54;
      end
      default: begin f[12] = 8'h08; f[13] = 8'h06; l4 = 14; end   // ARP
    endcase
    if (k == K_ROCE4 || k == K_ROCE6 || k == K_UDP4) begin
      f[l4 + 2] = (k == K_UDP4) ? 8'h00 : 8'h12;
      f[l4 + 3] = (k == K_UDP4) ? 8'h35 : 8'hB7;                 // 53 or 4791
    end
    if (k == K_ROCE4 || k == K_ROCE6 || k == K_UDP4) begin
      f[l4 + 8]  = opcode;
      f[l4 + 13] = qp[23:16]; f[l4 + 14] = qp[15:8]; f[l4 + 15] = qp[7:0];
    end
    if (k == K_TCP4) begin f[36] = 8'h12; f[37] = 8'hB7; end     // TCP to 4791: not RDMA
    return f;
  endfunction

  function automatic int n_beats(int len);
    return (len + AXIS_KEEP_W - 1) / AXIS_KEEP_W;
  endfunction

  function automatic axis_t beat_of(bytes_t f, int b);
    axis_t t;
    t = '0;
    t.tvalid = 1'b1;
    for (int i = 0; i < AXIS_KEEP_W; i++) begin
      int p = b * AXIS_KEEP_W + i;
      if (p < f.size()) begin t.tdata[8*i +: 8] = f[p]; t.tkeep[i] = 1'b1; end
    end
    t.tlast = (b == n_beats(f.size()) - 1);
    return t;
  endfunction
endpackage
