// tb_mm_kernel -- runs matrix-multiplication jobs on the kernel against a
// behavioural memory: full 16x16x16, small odd shapes, a job with bad
// arguments, and a status FIFO that is briefly full. Checks every C word in
// memory, that words after C are untouched, the status words, and that the
// array ran exactly a_col + 2N - 2 clocks.
module tb_mm_kernel;
  import reconic_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  logic [31:0] ctrl_data, stat_data;
  logic ctrl_empty, ctrl_pop, stat_full, stat_push, busy;
  logic [15:0] compute_cycles;
  axi_req_t  m_req;
  axi_resp_t m_resp;
  int checks = 0, failures = 0;
  logic [31:0] cq[$];
  logic [31:0] sq[$];

  mm_kernel #(.N(N)) dut (.*);
  axi_mem_model #(.READ_LAT(6)) mem (.clk, .rst_n, .req(m_req), .resp(m_resp));

  always #5 clk = ~clk;

  // control FIFO model: the head word is registered so that the kernel sees
  // it as a first-word-fall-through FIFO output
  always @(posedge clk) begin
    if (ctrl_pop) void'(cq.pop_front());
    if (stat_push) sq.push_back(stat_data);
    ctrl_empty <= (cq.size() == 0);
    ctrl_data  <= (cq.size() == 0) ? 32'h0 : cq[0];
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input logic [15:0] id, input int nargs, input logic [63:0] a,
                      input logic [63:0] b, input logic [63:0] c, input int m, input int k, input int p);
    logic [63:0] ad [3];
    ad[0] = a; ad[1] = b; ad[2] = c;
    cq.push_back({id, 8'(nargs), 8'h00});
    for (int i = 0; i < nargs; i++) begin
      cq.push_back(ad[i % 3][31:0]);
      cq.push_back(ad[i % 3][63:32]);
    end
    cq.push_back({8'h00, 8'(m), 8'(k), 8'(p)});
  endtask

  task automatic job(input logic [15:0] id, input logic [63:0] base, input int m, input int k, input int p);
    logic [63:0] a = base, b = base + 64'h1000, c = base + 64'h2000;
    logic [31:0] A [N][N];
    logic [31:0] B [N][N];
    logic [31:0] ref_c;
    int bad = 0;
    for (int i = 0; i < m; i++) for (int j = 0; j < k; j++) begin
      A[i][j] = 32'($urandom_range(0, 2000)) - 1000; mem.poke32(a + 64'(4 * (i * k + j)), A[i][j]);
    end
    for (int i = 0; i < k; i++) for (int j = 0; j < p; j++) begin
      B[i][j] = 32'($urandom_range(0, 2000)) - 1000; mem.poke32(b + 64'(4 * (i * p + j)), B[i][j]);
    end
    for (int w = 0; w < 300; w++) mem.poke32(c + 64'(4 * w), 32'hDEAD_BEEF);
    sq.delete();
    send(id, 3, a, b, c, m, k, p);
    while (sq.size() == 0) @(posedge clk);
    checks++;
    if (sq[0] !== {id, 8'h00, LC_STAT_DONE}) begin failures++; $display("status %h", sq[0]); end
    checks++;
    if (compute_cycles !== 16'(k + 2 * N - 2)) begin
      failures++; $display("compute cycles %0d expected %0d", compute_cycles, k + 2 * N - 2);
    end
    for (int i = 0; i < m; i++) for (int j = 0; j < p; j++) begin
      ref_c = 0;
      for (int x = 0; x < k; x++) ref_c += A[i][x] * B[x][j];
      checks++;
      if (mem.peek32(c + 64'(4 * (i * p + j))) !== ref_c) begin
        failures++; if (bad++ < 5) $display("C[%0d][%0d] %0d expected %0d", i, j,
                                           mem.peek32(c + 64'(4 * (i * p + j))), ref_c);
      end
    end
    for (int w = m * p; w < 300; w++) begin
      checks++;
      if (mem.peek32(c + 64'(4 * w)) !== 32'hDEAD_BEEF) begin failures++; $display("overwrite at word %0d", w); end
    end
  endtask

  initial begin
    stat_full = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    job(16'h0001, 64'hA350_0000_0001_0000, N, N, N);
    job(16'h0002, 64'hA350_0000_0002_0000, 3, 5, 7);
    job(16'h0003, 64'hA350_0000_0003_0000, 1, 1, 1);
    job(16'h0004, 64'h0000_0000_0004_0000, 16, 2, 9);
    // bad arguments: 2 address arguments only
    sq.delete();
    send(16'h0BAD, 2, 64'h100, 64'h200, 64'h300, 4, 4, 4);
    while (sq.size() == 0) @(posedge clk);
    checks++;
    if (sq[0] !== {16'h0BAD, 8'h00, LC_STAT_BAD_ARG}) begin failures++; $display("bad-arg status %h", sq[0]); end
    checks++;
    if (cq.size() != 0) begin failures++; $display("message not fully consumed"); end
    // too large a dimension
    sq.delete();
    send(16'h0BAE, 3, 64'h100, 64'h200, 64'h300, N + 1, 4, 4);
    while (sq.size() == 0) @(posedge clk);
    checks++;
    if (sq[0] !== {16'h0BAE, 8'h00, LC_STAT_BAD_ARG}) begin failures++; $display("big-dim status %h", sq[0]); end
    // status FIFO full: kernel must wait, then push
    stat_full = 1;
    fork
      job(16'h0005, 64'hA350_0000_0005_0000, 4, 4, 4);
      begin
        while (dut.state != dut.S_STATUS) @(posedge clk);
        repeat (20) @(posedge clk);
        checks++;
        if (sq.size() != 0 || !busy) begin failures++; $display("pushed into a full status FIFO"); end
        stat_full = 0;
      end
    join
    repeat (5) @(posedge clk);
    checks++;
    if (busy) begin failures++; $display("kernel still busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
