// tb_packet_classifier -- sends a random mix of RoCEv2 (IPv4 and IPv6), TCP,
// other UDP and ARP frames of random length with random backpressure on both
// outputs, and checks that every frame arrives whole and in order on the
// right output, with the BTH opcode and QP in the metadata, and the counters.
// Then moves RoCEv2 to another UDP port and disables classification.
module tb_packet_classifier;
  import reconic_pkg::*;
  import tb_frames_pkg::*;
  logic clk = 0, rst_n = 0;
  logic enable;
  logic [15:0] roce_port;
  axis_t rx_in, rdma_out, nonrdma_out;
  logic rx_in_ready, rdma_out_ready, nonrdma_out_ready;
  pc_meta_t rdma_meta;
  logic [31:0] rdma_pkts, nonrdma_pkts;
  int checks = 0, failures = 0;

  packet_classifier dut (.*);
  always #5 clk = ~clk;

  axis_t exp_r[$], exp_n[$];
  pc_meta_t exp_m[$];
  int sent_r = 0, sent_n = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random backpressure
  always @(negedge clk) begin
    rdma_out_ready    <= ($urandom_range(0, 3) != 0);
    nonrdma_out_ready <= ($urandom_range(0, 3) != 0);
  end

  // output checkers, at the rising edge
  always @(posedge clk) if (rst_n) begin
    if (rdma_out.tvalid && rdma_out_ready) begin
      checks++;
      // full metadata is checked on the last beat, class and opcode on all
      if (exp_r.size() == 0 || rdma_out != exp_r[0] || rdma_meta.is_rdma != 1'b1 ||
          rdma_meta.bth_opcode != exp_m[0].bth_opcode ||
          (rdma_out.tlast && rdma_meta != exp_m[0])) begin
        failures++;
        $display("%0t unexpected RDMA beat: meta %h", $time, rdma_meta);
      end
      if (exp_r.size() != 0) begin void'(exp_r.pop_front()); void'(exp_m.pop_front()); end
    end
    if (nonrdma_out.tvalid && nonrdma_out_ready) begin
      checks++;
      if (exp_n.size() == 0 || nonrdma_out != exp_n[0]) begin
        failures++; $display("unexpected non-RDMA beat");
      end
      if (exp_n.size() != 0) void'(exp_n.pop_front());
    end
  end

  task automatic send(kind_t k, int len, bit expect_rdma);
    bytes_t f;
    logic [7:0] op = 8'($urandom_range(0, 255));
    logic [23:0] qp = 24'($urandom);
    pc_meta_t m;
    f = make_frame(k, len, op, qp, $urandom_range(0, 1000));
    m.is_rdma = 1'b1; m.bth_opcode = op; m.bth_dest_qp = qp;
    for (int b = 0; b < n_beats(len); b++) begin
      axis_t t = beat_of(f, b);
      if (expect_rdma) begin exp_r.push_back(t); exp_m.push_back(m); end
      else exp_n.push_back(t);
    end
    if (expect_rdma) sent_r++; else sent_n++;
    for (int b = 0; b < n_beats(len); b++) begin
      @(negedge clk);
      rx_in = beat_of(f, b);
      while ($urandom_range(0, 4) == 0) begin
        rx_in.tvalid = 1'b0; @(negedge clk); rx_in = beat_of(f, b);
      end
      #1; while (!rx_in_ready) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk) rx_in.tvalid = 1'b0;
  endtask

  task automatic drain();
    int n = 0;
    while ((exp_r.size() != 0 || exp_n.size() != 0) && n < 5000) begin @(posedge clk); n++; end
    checks++;
    if (exp_r.size() != 0 || exp_n.size() != 0) begin failures++; $display("frames lost"); end
  endtask

  initial begin
    rx_in = '0; enable = 1; roce_port = ROCEV2_UDP_PORT;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      kind_t k;
      k = kind_t'($urandom_range(0, 4));
      // a RoCEv2 frame holds at least its headers and ICRC (78 bytes on IPv6)
      send(k, $urandom_range(k == K_ROCE6 ? 80 : 60, 400), is_rdma_kind(k));
    end
    drain();
    checks++;
    if (rdma_pkts != 32'(sent_r) || nonrdma_pkts != 32'(sent_n)) begin
      failures++; $display("counters %0d/%0d expected %0d/%0d", rdma_pkts, nonrdma_pkts, sent_r, sent_n);
    end
    checks++;
    if (sent_r < 50 || sent_n < 50) begin failures++; $display("mix %0d %0d", sent_r, sent_n); end
    // single-beat frames back to back
    for (int i = 0; i < 20; i++) send(i % 2 ? K_ROCE4 : K_UDP4, 64, i % 2 == 1);
    drain();
    // RoCEv2 moved to port 53: the "other UDP" frames become RDMA
    roce_port = 16'd53;
    for (int i = 0; i < 10; i++) send(K_UDP4, 100, 1);
    for (int i = 0; i < 10; i++) send(K_ROCE4, 100, 0);
    drain();
    // classification disabled: everything to the host
    roce_port = ROCEV2_UDP_PORT; enable = 0;
    for (int i = 0; i < 10; i++) send(K_ROCE6, 150, 0);
    drain();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
