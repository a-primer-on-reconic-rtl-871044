// tb_lookaside_compute -- drives the lookaside compute block only through its
// AXI4-Lite registers, as the host would: writes control messages for two
// kernels, waits by polling COMPLETION (kernel 0) and by interrupt
// (kernel 1), pops the status words, and checks the matrix products in
// memory. Also checks the free-slot count, an overfull control FIFO
// (SLVERR), STATUS read when empty (0), IRQ_PENDING and a decode error.
module tb_lookaside_compute;
  import reconic_pkg::*;
  localparam int N = 16;
  localparam int NK = 2;
  logic clk = 0, rst_n = 0, irq;
  axil_req_t  cfg_req;
  axil_resp_t cfg_resp;
  axi_req_t   mem_req;
  axi_resp_t  mem_resp;
  int checks = 0, failures = 0;

  lookaside_compute #(.NK(NK), .N(N), .CTRL_DEPTH(16), .STAT_DEPTH(4)) dut (.*);
  axi_mem_model #(.READ_LAT(10)) mem (.clk, .rst_n, .req(mem_req), .resp(mem_resp));
  axil_master_bfm host (.clk, .req(cfg_req), .resp(cfg_resp));
  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h expected %h", what, got, exp); end
  endtask

  logic [31:0] A [2][N][N];
  logic [31:0] B [2][N][N];

  task automatic setup(input int k, input logic [63:0] base, input int m, input int kk, input int p);
    for (int i = 0; i < m; i++) for (int j = 0; j < kk; j++) begin
      A[k][i][j] = $urandom_range(0, 300); mem.poke32(base + 64'(4 * (i * kk + j)), A[k][i][j]);
    end
    for (int i = 0; i < kk; i++) for (int j = 0; j < p; j++) begin
      B[k][i][j] = $urandom_range(0, 300); mem.poke32(base + 64'h1000 + 64'(4 * (i * p + j)), B[k][i][j]);
    end
  endtask

  task automatic start(input int k, input logic [15:0] id, input logic [63:0] base,
                       input int m, input int kk, input int p);
    logic [1:0] r;
    logic [31:0] w [8];
    w[0] = {id, 8'd3, 8'h00};
    w[1] = base[31:0];              w[2] = base[63:32];
    w[3] = base[31:0] + 32'h1000;   w[4] = base[63:32];
    w[5] = base[31:0] + 32'h2000;   w[6] = base[63:32];
    w[7] = {8'h00, 8'(m), 8'(kk), 8'(p)};
    for (int i = 0; i < 8; i++) begin
      host.write(32'(k * 32), w[i], r);
      expect_eq(32'(r), 32'(AXI_RESP_OKAY), "ctrl write resp");
    end
  endtask

  task automatic check_c(input int k, input logic [63:0] base, input int m, input int kk, input int p);
    int bad = 0;
    for (int i = 0; i < m; i++) for (int j = 0; j < p; j++) begin
      logic [31:0] ref_c = 0;
      for (int x = 0; x < kk; x++) ref_c += A[k][i][x] * B[k][x][j];
      checks++;
      if (mem.peek32(base + 64'h2000 + 64'(4 * (i * p + j))) !== ref_c) begin
        failures++; if (bad++ < 4) $display("kernel %0d C[%0d][%0d] wrong", k, i, j);
      end
    end
  endtask

  initial begin
    logic [31:0] d; logic [1:0] r;
    int polls;
    repeat (3) @(posedge clk); rst_n = 1;
    host.read(32'h000, d, r); expect_eq(d, 16, "free slots");
    host.read(32'h004, d, r); expect_eq(d, 0, "status when empty");
    host.read(32'h00C, d, r); expect_eq(d, 0, "completion idle");
    host.write(32'h200, 32'h2, r);                      // interrupt for kernel 1 only
    host.read(32'h300, d, r); expect_eq(32'(r), 32'(AXI_RESP_DECERR), "decode error");

    setup(0, 64'hA350_0000_0010_0000, N, N, N);
    setup(1, 64'hA350_0000_0020_0000, 5, 9, 3);
    // both kernels run at once and share the memory port
    start(0, 16'h1111, 64'hA350_0000_0010_0000, N, N, N);
    start(1, 16'h2222, 64'hA350_0000_0020_0000, 5, 9, 3);

    // kernel 1 by interrupt
    while (!irq) @(posedge clk);
    checks++;
    host.read(32'h204, d, r); checks++; if (d[1] !== 1'b1) begin failures++; $display("pending %h", d); end
    host.read(32'h024, d, r); expect_eq(d, {16'h2222, 8'h00, LC_STAT_DONE}, "kernel 1 status");
    check_c(1, 64'hA350_0000_0020_0000, 5, 9, 3);
    #1 expect_eq(32'(irq), 0, "irq cleared after pop");

    // kernel 0 by polling
    polls = 0;
    do begin host.read(32'h00C, d, r); polls++; end while (d[0] !== 1'b1 && polls < 5000);
    expect_eq(d & 32'h1, 1, "completion register");
    checks++; if (irq) begin failures++; $display("irq raised for masked kernel"); end
    host.read(32'h008, d, r); expect_eq(d, 1, "status count");
    host.read(32'h004, d, r); expect_eq(d, {16'h1111, 8'h00, LC_STAT_DONE}, "kernel 0 status");
    check_c(0, 64'hA350_0000_0010_0000, N, N, N);
    host.read(32'h00C, d, r); expect_eq(d, 0, "completion cleared");

    // Kernel 1 gets five bad-argument messages; its status FIFO (depth 4)
    // fills, the kernel stalls, and further control words fill its control
    // FIFO until a write is refused with SLVERR.
    for (int j = 0; j < 5; j++) begin
      host.write(32'h020, {16'(16'h3000 + j), 8'd0, 8'h00}, r);
      host.write(32'h020, 32'h0, r);                   // dims 0 -> bad argument
    end
    repeat (20) @(posedge clk);
    host.read(32'h028, d, r); expect_eq(d, 4, "status FIFO full");
    for (int j = 0; j < 20; j++) host.write(32'h020, 32'h0, r);
    expect_eq(32'(r), 32'(AXI_RESP_SLVERR), "write into full control FIFO");
    host.read(32'h020, d, r); expect_eq(d, 0, "no free control slots");
    for (int j = 0; j < 4; j++) begin
      host.read(32'h024, d, r); expect_eq(d, {16'(16'h3000 + j), 8'h00, LC_STAT_BAD_ARG}, "bad-arg status");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
