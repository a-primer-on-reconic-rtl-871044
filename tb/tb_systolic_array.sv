// tb_systolic_array -- feeds random matrices, skewed as the array expects,
// and compares every accumulator with a reference product computed here.
// Also checks that the result is complete after exactly K + 2N - 2 enabled
// clocks (and not one clock earlier) and that clear zeroes the array.
module tb_systolic_array;
  localparam int N = 16;
  logic clk = 0, clear, en;
  logic [31:0] a_in [N];
  logic [31:0] b_in [N];
  logic [31:0] acc  [N][N];
  int checks = 0, failures = 0;
  logic [31:0] A [N][N];
  logic [31:0] B [N][N];
  logic [31:0] C [N][N];

  systolic_array #(.N(N), .W(32)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int M, input int K, input int P, input int maxv);
    int mism_early;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      A[i][j] = (i < M && j < K) ? 32'($urandom_range(0, maxv)) - 32'(maxv / 2) : 0;
      B[i][j] = (i < K && j < P) ? 32'($urandom_range(0, maxv)) - 32'(maxv / 2) : 0;
    end
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      C[i][j] = 0;
      for (int k = 0; k < K; k++) C[i][j] += A[i][k] * B[k][j];
    end
    clear = 1; en = 0; @(posedge clk); #1 clear = 0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      checks++; if (acc[i][j] !== 0) failures++;
    end
    for (int t = 0; t < K + 2 * N - 2; t++) begin
      en = 1;
      for (int r = 0; r < N; r++) begin
        a_in[r] = (t - r >= 0 && t - r < K) ? A[r][t - r] : 0;
        b_in[r] = (t - r >= 0 && t - r < K) ? B[t - r][r] : 0;
      end
      @(posedge clk); #1;
      if (t == K + 2 * N - 4) begin
        // one clock before the end: last cell must not be complete yet
        // (only observable when its final product is nonzero)
        if (A[N-1][K-1] * B[K-1][N-1] != 0) begin
          checks++;
          if (acc[N-1][N-1] === C[N-1][N-1]) begin failures++; $display("finished early"); end
        end
      end
    end
    en = 0;
    mism_early = 0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      checks++;
      if (acc[i][j] !== C[i][j]) begin
        failures++;
        if (mism_early++ < 5) $display("C[%0d][%0d]=%0d expected %0d", i, j, acc[i][j], C[i][j]);
      end
    end
    repeat (3) @(posedge clk);  // en low: values hold
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      checks++; if (acc[i][j] !== C[i][j]) failures++;
    end
  endtask

  initial begin
    clear = 1; en = 0;
    for (int r = 0; r < N; r++) begin a_in[r] = 0; b_in[r] = 0; end
    repeat (2) @(posedge clk);
    run(N, N, N, 1000);
    run(3, 5, 7, 100);
    run(N, 1, N, 65535);
    run(1, N, 1, 20);
    run(N, N, N, 32'h7fff_ffff);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
