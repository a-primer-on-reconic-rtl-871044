// tb_reconic_shell -- end-to-end test of the shell at its default parameters.
//
// The testbench plays the parts outside the shell: the MAC (frames in and
// out), the RDMA engine (AXI4-Stream ports, five AXI4 managers, register
// space), the QDMA subsystem (host frames, host DMA into device memory, the
// slave bridge to host memory, the host's register accesses) and the DDR4
// memory. It runs the networked matrix-multiplication flow:
//   1. the host configures the RDMA engine through the shell's register path;
//   2. the "RDMA engine" fetches two WQEs from a send queue in host memory
//      (routed to host memory), writes the payload read from the remote
//      peer - matrices A and B - into device memory (0xA35 tag), and writes
//      completion entries to a CQ in host memory;
//   3. the host sends a compute control message to the lookaside kernel,
//      waits for the interrupt, pops the status word, and reads C back from
//      device memory by DMA, checking it against a reference product.
// At the same time mixed RoCEv2 / other frames arrive from the network and
// both transmit sources send frames. Every mechanism is counted: RDMA and
// non-RDMA classification, host and device routing in sys_crossbar, waiting
// in mem_crossbar, transmit contention, the kernel interrupt, the streaming
// compute drop, a register decode error. One that never happens is a failure.
module tb_reconic_shell;
  import reconic_pkg::*;
  import tb_frames_pkg::*;
  localparam int NR = 5;
  localparam int N  = 16;
  logic clk = 0, rst_n = 0;
  axis_t mac_rx, mac_tx, rdma_rx, rdma_tx, qdma_rx, qdma_tx;
  logic mac_rx_ready, mac_tx_ready, rdma_rx_ready, rdma_tx_ready, qdma_rx_ready, qdma_tx_ready;
  pc_meta_t rdma_rx_meta;
  axil_req_t mac_cfg_req, rdma_cfg_req, qdma_cfg_req;
  axil_resp_t mac_cfg_resp, rdma_cfg_resp, qdma_cfg_resp;
  axi_req_t rdma_m_req [NR];
  axi_resp_t rdma_m_resp [NR];
  axi_req_t qdma_mm_req, qdma_bridge_req, ddr_req;
  axi_resp_t qdma_mm_resp, qdma_bridge_resp, ddr_resp;
  logic lc_irq;
  logic [31:0] host_txn_count, dev_txn_count;
  int checks = 0, failures = 0;

  reconic_shell dut (.*);

  axi_mem_model #(.READ_LAT(170)) host_mem (.clk, .rst_n, .req(qdma_bridge_req), .resp(qdma_bridge_resp));
  axi_mem_model #(.READ_LAT(20))  ddr      (.clk, .rst_n, .req(ddr_req), .resp(ddr_resp));
  axil_reg_model rdma_regs (.clk, .rst_n, .req(rdma_cfg_req), .resp(rdma_cfg_resp));
  axil_reg_model mac_regs  (.clk, .rst_n, .req(mac_cfg_req),  .resp(mac_cfg_resp));
  axil_master_bfm host     (.clk, .req(qdma_cfg_req), .resp(qdma_cfg_resp));
  axi_master_bfm #(.ID(4'hE)) host_dma (.clk, .req(qdma_mm_req), .resp(qdma_mm_resp));
  for (genvar m = 0; m < NR; m++) begin : g_r
    axi_master_bfm #(.ID(AXI_ID_W'(m))) bfm (.clk, .req(rdma_m_req[m]), .resp(rdma_m_resp[m]));
  end
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_mx_wait = 0, n_irq = 0;
  always @(posedge clk) if (rst_n) begin
    for (int m = 0; m < 3; m++)
      if ((dut.mx_req[m].ar_valid && dut.u_mem_xbar.u_core.r_busy[0] && dut.u_mem_xbar.u_core.r_owner[0] != 2'(m)) ||
          (dut.mx_req[m].aw_valid && dut.u_mem_xbar.u_core.w_busy[0] && dut.u_mem_xbar.u_core.w_owner[0] != 2'(m)))
        n_mx_wait++;
    if (lc_irq) n_irq++;
  end

  // ---------------- network side ----------------
  axis_t exp_rdma[$], exp_host[$], exp_tx_r[$], exp_tx_h[$];
  int rx_rdma_frames = 0, rx_host_frames = 0, rx_dropped = 0;

  always @(negedge clk) begin
    rdma_rx_ready <= ($urandom_range(0, 3) != 0);
    qdma_rx_ready <= ($urandom_range(0, 3) != 0);
    mac_tx_ready  <= ($urandom_range(0, 4) != 0);
  end

  int tx_cur = -1;
  always @(posedge clk) if (rst_n) begin
    if (rdma_rx.tvalid && rdma_rx_ready) begin
      checks++;
      if (!exp_rdma.size() || rdma_rx != exp_rdma[0] || !rdma_rx_meta.is_rdma) begin
        failures++; $display("RDMA receive beat wrong");
      end
      if (exp_rdma.size()) void'(exp_rdma.pop_front());
    end
    if (qdma_rx.tvalid && qdma_rx_ready) begin
      checks++;
      if (!exp_host.size() || qdma_rx != exp_host[0]) begin failures++; $display("host receive beat wrong"); end
      if (exp_host.size()) void'(exp_host.pop_front());
    end
    if (mac_tx.tvalid && mac_tx_ready) begin
      checks++;
      if (tx_cur < 0) tx_cur = (exp_tx_r.size() && mac_tx == exp_tx_r[0]) ? 1 : 0;
      if (tx_cur == 1) begin
        if (!exp_tx_r.size() || mac_tx != exp_tx_r[0]) begin failures++; $display("TX beat wrong (RDMA)"); end
        if (exp_tx_r.size()) void'(exp_tx_r.pop_front());
      end else begin
        if (!exp_tx_h.size() || mac_tx != exp_tx_h[0]) begin failures++; $display("TX beat wrong (host)"); end
        if (exp_tx_h.size()) void'(exp_tx_h.pop_front());
      end
      if (mac_tx.tlast) tx_cur = -1;
    end
  end

  task automatic mac_send(kind_t k, int len, bit dropped);
    bytes_t f = make_frame(k, len, 8'h10, 24'h11, $urandom_range(0, 500));
    for (int b = 0; b < n_beats(len); b++)
      if (is_rdma_kind(k)) exp_rdma.push_back(beat_of(f, b));
      else if (!dropped) exp_host.push_back(beat_of(f, b));
    if (is_rdma_kind(k)) rx_rdma_frames++; else if (dropped) rx_dropped++; else rx_host_frames++;
    for (int b = 0; b < n_beats(len); b++) begin
      @(negedge clk); mac_rx = beat_of(f, b);
      #1; while (!mac_rx_ready) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk) mac_rx.tvalid = 0;
  endtask

  task automatic tx_send(bit rdma, int len, int seed);
    bytes_t f = make_frame(rdma ? K_ROCE4 : K_UDP4, len, 8'h20, 24'h22, seed);
    for (int b = 0; b < n_beats(len); b++)
      if (rdma) exp_tx_r.push_back(beat_of(f, b)); else exp_tx_h.push_back(beat_of(f, b));
    for (int b = 0; b < n_beats(len); b++) begin
      @(negedge clk);
      if (rdma) rdma_tx = beat_of(f, b); else qdma_tx = beat_of(f, b);
      #1; while (!(rdma ? rdma_tx_ready : qdma_tx_ready)) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk);
    if (rdma) rdma_tx.tvalid = 0; else qdma_tx.tvalid = 0;
  endtask

  task automatic network_traffic();
    logic [1:0] r;
    for (int i = 0; i < 40; i++) begin
      kind_t k;
      k = kind_t'($urandom_range(0, 4));
      mac_send(k, $urandom_range(k == K_ROCE6 ? 80 : 60, 300), 0);
    end
    // streaming compute drops host-bound frames while told to
    host.write(32'h0030_0010, 32'h1, r);
    for (int i = 0; i < 6; i++) mac_send(i % 2 ? K_TCP4 : K_ROCE4, 120, i % 2 == 1);
    host.write(32'h0030_0010, 32'h0, r);
  endtask

  // ---------------- memory-side flow ----------------
  localparam logic [63:0] DEV    = 64'hA350_0000_0000_0000;
  localparam logic [63:0] SQ     = 64'h0000_0000_8000_0000;   // host memory
  localparam logic [63:0] CQ     = 64'h0000_0000_8001_0000;
  localparam logic [63:0] A_ADDR = DEV | 64'h0010_0000;
  localparam logic [63:0] B_ADDR = DEV | 64'h0010_1000;
  localparam logic [63:0] C_ADDR = DEV | 64'h0010_2000;
  logic [31:0] A [N][N];
  logic [31:0] B [N][N];

  // pack one matrix row-major into 64-byte beats and write it as the RDMA
  // engine's payload port would
  task automatic rdma_payload_write(input logic [63:0] base, input bit is_b);
    for (int beat = 0; beat < N * N / 16; beat++)
      for (int w = 0; w < 16; w++) begin
        int idx = beat * 16 + w;
        g_r[1].bfm.write32(base + 64'(4 * idx), is_b ? B[idx / N][idx % N] : A[idx / N][idx % N]);
      end
  endtask

  task automatic rdma_flow();
    logic [31:0] d;
    int e;
    // WQE fetch: the send queue lives in host memory (two WQEs, steps 2-3 of the flow)
    for (int q = 0; q < 2; q++) begin
      g_r[0].bfm.read32(SQ + 64'(q * 64), d);
      expect_true(d == 32'hC0DE_0000 + 32'(q), "WQE fetched from host memory");
    end
    // payload arriving from the peer goes to device memory
    rdma_payload_write(A_ADDR, 0);
    rdma_payload_write(B_ADDR, 1);
    // a burst through the device path, read back through another port
    g_r[3].bfm.write_burst(DEV | 64'h0020_0000, 8, 32'h55);
    g_r[4].bfm.read_check(DEV | 64'h0020_0000, 8, 32'h55, e);
    expect_true(e == 0, "RDMA burst to device memory read back");
    // completions into the CQ in host memory (step 5)
    g_r[2].bfm.write32(CQ, 32'h0000_0001);
    g_r[2].bfm.write32(CQ + 64'd64, 32'h0000_0002);
  endtask

  task automatic host_dma_traffic();
    int e;
    // the host's own DMA traffic into device memory competes with the RDMA
    // engine in mem_crossbar
    for (int i = 0; i < 6; i++) begin
      host_dma.write_burst(DEV | 64'(32'h0030_0000 + i * 32'h1000), 4, 32'(i));
      host_dma.read_check(64'(32'h0030_0000 + i * 32'h1000), 4, 32'(i), e);  // untagged offset
      expect_true(e == 0, "host DMA to device memory");
    end
  endtask

  initial begin
    logic [31:0] d; logic [1:0] r;
    int fired = 0;
    mac_rx = '0; rdma_tx = '0; qdma_tx = '0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      A[i][j] = $urandom_range(0, 5000); B[i][j] = $urandom_range(0, 5000);
    end
    host_mem.poke32(SQ, 32'hC0DE_0000);
    host_mem.poke32(SQ + 64, 32'hC0DE_0001);
    repeat (5) @(posedge clk); rst_n = 1;
    repeat (2) @(posedge clk);

    // step 1: configuration through the register path
    host.read(32'h0030_0004, d, r);  expect_true(d == 32'd4791, "RoCEv2 port register");
    host.write(32'h0000_0010, 32'hABCD, r);                       // RDMA engine register
    host.read(32'h0000_0010, d, r);  expect_true(d == 32'hABCD, "RDMA engine register via crossbar");
    host.write(32'h0010_0008, 32'h1, r);                          // MAC register
    expect_true(mac_regs.accesses == 1, "MAC register reached");
    host.read(32'h0050_0000, d, r);  expect_true(r == AXI_RESP_DECERR, "decode error outside windows");
    host.write(32'h0020_0200, 32'h1, r);                          // LC interrupt enable

    // steps 2-5 with network traffic and host DMA alongside
    fork
      rdma_flow();
      host_dma_traffic();
      network_traffic();
      begin
        for (int i = 0; i < 25; i++) tx_send(1, $urandom_range(60, 200), i);
      end
      begin
        for (int i = 0; i < 25; i++) tx_send(0, $urandom_range(60, 200), 100 + i);
      end
    join
    expect_true(host_mem.peek32(CQ) == 1 && host_mem.peek32(CQ + 64) == 2, "CQ entries in host memory");
    begin
      int bad = 0;
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++)
        if (ddr.peek32(64'(32'h0010_0000 + 4 * (i * N + j))) != A[i][j] ||
            ddr.peek32(64'(32'h0010_1000 + 4 * (i * N + j))) != B[i][j]) bad++;
      expect_true(bad == 0, "payload in device memory");
    end

    // step 6: compute control message for the lookaside kernel
    host.write(32'h0020_0000, {16'h0600, 8'd3, 8'h00}, r);
    host.write(32'h0020_0000, A_ADDR[31:0], r); host.write(32'h0020_0000, A_ADDR[63:32], r);
    host.write(32'h0020_0000, B_ADDR[31:0], r); host.write(32'h0020_0000, B_ADDR[63:32], r);
    host.write(32'h0020_0000, C_ADDR[31:0], r); host.write(32'h0020_0000, C_ADDR[63:32], r);
    host.write(32'h0020_0000, {8'h00, 8'(N), 8'(N), 8'(N)}, r);
    // while it runs, the RDMA engine keeps using device memory
    fork
      begin int e; g_r[3].bfm.write_burst(DEV | 64'h0040_0000, 16, 32'h77);
            g_r[3].bfm.read_check(DEV | 64'h0040_0000, 16, 32'h77, e);
            expect_true(e == 0, "RDMA traffic during compute"); end
      begin
        // step 7: wait for the interrupt
        int n = 0;
        while (!lc_irq && n < 20000) begin @(posedge clk); n++; end
        fired = lc_irq;
      end
    join
    expect_true(fired == 1, "compute-completion interrupt");
    host.read(32'h0020_0004, d, r);
    expect_true(d == {16'h0600, 8'h00, LC_STAT_DONE}, "kernel status word");
    // step 8: results by host DMA
    begin
      int bad = 0;
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
        logic [31:0] ref_c;
        ref_c = 0;
        for (int k = 0; k < N; k++) ref_c += A[i][k] * B[k][j];
        host_dma.read32(C_ADDR + 64'(4 * (i * N + j)), d);
        checks++;
        if (d !== ref_c) begin failures++; if (bad++ < 4) $display("C[%0d][%0d] %0d expected %0d", i, j, d, ref_c); end
      end
    end

    // drain the network side
    begin
      int n = 0;
      while ((exp_rdma.size() || exp_host.size() || exp_tx_r.size() || exp_tx_h.size()) && n < 5000) begin
        @(posedge clk); n++;
      end
    end
    expect_true(!exp_rdma.size() && !exp_host.size() && !exp_tx_r.size() && !exp_tx_h.size(),
                "all frames delivered");
    host.read(32'h0030_0008, d, r); expect_true(d == 32'(rx_rdma_frames), "RDMA frame counter");
    host.read(32'h0030_000C, d, r); expect_true(d == 32'(rx_host_frames + rx_dropped), "non-RDMA frame counter");
    host.read(32'h0030_0024, d, r); expect_true(d == 32'(rx_dropped), "dropped frame counter");

    // every mechanism must have happened
    host.read(32'h0030_0028, d, r);
    $display("mechanisms: rdma_rx=%0d host_rx=%0d dropped=%0d host_route=%0d dev_route=%0d mem_wait=%0d tx_contention=%0d irq_clocks=%0d",
             rx_rdma_frames, rx_host_frames, rx_dropped, host_txn_count, dev_txn_count, n_mx_wait, d, n_irq);
    expect_true(rx_rdma_frames > 0, "RDMA classification happened");
    expect_true(rx_host_frames > 0, "non-RDMA classification happened");
    expect_true(rx_dropped > 0, "streaming compute drop happened");
    expect_true(host_txn_count > 0, "routing to host memory happened");
    expect_true(dev_txn_count > 0, "routing to device memory happened");
    expect_true(n_mx_wait > 0, "mem_crossbar arbitration wait happened");
    expect_true(d > 0, "transmit contention happened");
    expect_true(n_irq > 0, "lookaside interrupt happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
