// tb_tx_arbiter -- both transmit sources send frames at random times with
// random backpressure from the MAC. Checks that every frame leaves whole,
// never interleaved with the other source, each source's frames in order,
// that under contention the sources alternate frame by frame, and the
// contention counter.
module tb_tx_arbiter;
  import reconic_pkg::*;
  import tb_frames_pkg::*;
  logic clk = 0, rst_n = 0;
  axis_t rdma_tx, nonrdma_tx, tx_out;
  logic rdma_tx_ready, nonrdma_tx_ready, tx_out_ready;
  logic [31:0] contention_count;
  int checks = 0, failures = 0;
  axis_t qr[$], qn[$];
  int cur = -1;          // source of the frame being received
  int last_src = -1, alternations = 0, both_waiting_starts = 0;

  tx_arbiter dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) tx_out_ready <= ($urandom_range(0, 3) != 0);

  always @(posedge clk) if (rst_n && tx_out.tvalid && tx_out_ready) begin
    int src;
    checks++;
    if (cur < 0) begin
      // a new frame: which source does it belong to?
      src = (qr.size() && tx_out == qr[0]) ? 1 : (qn.size() && tx_out == qn[0]) ? 0 : -1;
      if (src < 0) begin failures++; $display("frame start matches no source"); end
      if (rdma_tx.tvalid && nonrdma_tx.tvalid) begin
        both_waiting_starts++;
        checks++;
        if (last_src >= 0 && src == last_src) begin failures++; $display("no alternation under contention"); end
      end
      if (src != last_src && last_src >= 0) alternations++;
      last_src = src;
      cur = src;
    end else begin
      if ((cur == 1 && (qr.size() == 0 || tx_out != qr[0])) ||
          (cur == 0 && (qn.size() == 0 || tx_out != qn[0]))) begin
        failures++; $display("beat of frame from source %0d wrong or interleaved", cur);
      end
    end
    if (cur == 1 && qr.size()) void'(qr.pop_front());
    if (cur == 0 && qn.size()) void'(qn.pop_front());
    if (tx_out.tlast) cur = -1;
  end

  task automatic src_rdma(int n);
    for (int i = 0; i < n; i++) begin
      int len = $urandom_range(60, 260);
      bytes_t f = make_frame(K_ROCE4, len, 8'(i), 24'(i), i);
      for (int b = 0; b < n_beats(len); b++) qr.push_back(beat_of(f, b));
      for (int b = 0; b < n_beats(len); b++) begin
        @(negedge clk); rdma_tx = beat_of(f, b);
        #1; while (!rdma_tx_ready) begin @(negedge clk); #1; end
        @(posedge clk);
      end
      @(negedge clk) rdma_tx.tvalid = 0;
      repeat ($urandom_range(0, 3)) @(posedge clk);
    end
  endtask

  task automatic src_host(int n);
    for (int i = 0; i < n; i++) begin
      int len = $urandom_range(60, 260);
      bytes_t f = make_frame(K_UDP4, len, 8'(i), 24'(i), 1000 + i);
      for (int b = 0; b < n_beats(len); b++) qn.push_back(beat_of(f, b));
      for (int b = 0; b < n_beats(len); b++) begin
        @(negedge clk); nonrdma_tx = beat_of(f, b);
        #1; while (!nonrdma_tx_ready) begin @(negedge clk); #1; end
        @(posedge clk);
      end
      @(negedge clk) nonrdma_tx.tvalid = 0;
      repeat ($urandom_range(0, 3)) @(posedge clk);
    end
  endtask

  initial begin
    rdma_tx = '0; nonrdma_tx = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    fork src_rdma(80); src_host(80); join
    repeat (20) @(posedge clk);
    checks++;
    if (qr.size() || qn.size()) begin failures++; $display("frames lost"); end
    checks++;
    if (both_waiting_starts == 0 || contention_count != 32'(both_waiting_starts)) begin
      failures++; $display("contention %0d counted %0d", both_waiting_starts, contention_count);
    end
    $display("contended frame starts %0d, alternations %0d", both_waiting_starts, alternations);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
