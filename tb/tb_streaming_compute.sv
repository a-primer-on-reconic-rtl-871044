// tb_streaming_compute -- sends frames of random length on both lanes with
// random backpressure and checks that they come out unchanged and in order,
// that metadata follows RDMA frames, the frame and byte counters, and that
// with the drop bit set whole non-RDMA frames are discarded and counted while
// the RDMA lane is unaffected.
module tb_streaming_compute;
  import reconic_pkg::*;
  import tb_frames_pkg::*;
  logic clk = 0, rst_n = 0, drop_nonrdma;
  axis_t rdma_in, rdma_out, nonrdma_in, nonrdma_out;
  pc_meta_t rdma_meta_in, rdma_meta_out;
  logic rdma_in_ready, rdma_out_ready, nonrdma_in_ready, nonrdma_out_ready;
  logic [31:0] rdma_frames, nonrdma_frames, nonrdma_dropped;
  logic [47:0] rdma_bytes, nonrdma_bytes;
  int checks = 0, failures = 0;
  axis_t er[$], en[$];
  pc_meta_t em[$];
  longint rb = 0, nb = 0;
  int rf = 0, nf = 0, nd = 0;

  streaming_compute dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    rdma_out_ready    <= ($urandom_range(0, 2) != 0);
    nonrdma_out_ready <= ($urandom_range(0, 2) != 0);
  end

  always @(posedge clk) if (rst_n) begin
    if (rdma_out.tvalid && rdma_out_ready) begin
      checks++;
      if (er.size() == 0 || rdma_out != er[0] || rdma_meta_out != em[0]) begin
        failures++; $display("RDMA lane beat wrong");
      end
      if (er.size()) begin void'(er.pop_front()); void'(em.pop_front()); end
    end
    if (nonrdma_out.tvalid && nonrdma_out_ready) begin
      checks++;
      if (en.size() == 0 || nonrdma_out != en[0]) begin failures++; $display("non-RDMA lane beat wrong"); end
      if (en.size()) void'(en.pop_front());
    end
  end

  task automatic send_rdma(int len);
    bytes_t f = make_frame(K_ROCE4, len, 8'h0A, 24'h000123, $urandom_range(0, 99));
    pc_meta_t m;
    m.is_rdma = 1; m.bth_opcode = 8'($urandom); m.bth_dest_qp = 24'($urandom);
    for (int b = 0; b < n_beats(len); b++) begin er.push_back(beat_of(f, b)); em.push_back(m); end
    rb += len; rf++;
    for (int b = 0; b < n_beats(len); b++) begin
      @(negedge clk); rdma_in = beat_of(f, b); rdma_meta_in = m;
      #1; while (!rdma_in_ready) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk) rdma_in.tvalid = 0;
  endtask

  task automatic send_nonrdma(int len, bit dropped);
    bytes_t f = make_frame(K_TCP4, len, 8'h00, 24'h0, $urandom_range(0, 99));
    if (!dropped) begin
      for (int b = 0; b < n_beats(len); b++) en.push_back(beat_of(f, b));
      nb += len; nf++;
    end else nd++;
    for (int b = 0; b < n_beats(len); b++) begin
      @(negedge clk); nonrdma_in = beat_of(f, b);
      #1; while (!nonrdma_in_ready) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk) nonrdma_in.tvalid = 0;
  endtask

  task automatic wait_empty();
    int n = 0;
    while ((er.size() || en.size()) && n < 2000) begin @(posedge clk); n++; end
    repeat (3) @(posedge clk);
    checks++;
    if (rdma_frames != 32'(rf) || rdma_bytes != 48'(rb) || nonrdma_frames != 32'(nf) ||
        nonrdma_bytes != 48'(nb) || nonrdma_dropped != 32'(nd) || er.size() || en.size()) begin
      failures++;
      $display("counters %0d %0d %0d %0d %0d expected %0d %0d %0d %0d %0d", rdma_frames, rdma_bytes,
               nonrdma_frames, nonrdma_bytes, nonrdma_dropped, rf, rb, nf, nb, nd);
    end
  endtask

  initial begin
    rdma_in = '0; nonrdma_in = '0; rdma_meta_in = '0; drop_nonrdma = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    fork
      for (int i = 0; i < 60; i++) send_rdma($urandom_range(60, 300));
      for (int i = 0; i < 60; i++) send_nonrdma($urandom_range(60, 300), 0);
    join
    wait_empty();
    drop_nonrdma = 1;
    fork
      for (int i = 0; i < 20; i++) send_rdma($urandom_range(60, 300));
      for (int i = 0; i < 20; i++) send_nonrdma($urandom_range(60, 300), 1);
    join
    wait_empty();
    drop_nonrdma = 0;
    for (int i = 0; i < 5; i++) send_nonrdma(130, 0);
    wait_empty();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
