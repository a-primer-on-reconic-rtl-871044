// tb_sync_fifo -- self-checking test of the control/status FIFO: random
// pushes and pops against a queue reference, full/empty/count at every clock,
// fill to full and drain to empty.
module tb_sync_fifo;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic wr_en, rd_en, full, empty;
  logic [31:0] wr_data, rd_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [31:0] q[$];

  sync_fifo #(.WIDTH(32), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input bit w, input bit r);
    wr_en = w && !full; rd_en = r && !empty; wr_data = $urandom;
    @(posedge clk);
    #1;
  endtask

  always @(posedge clk) if (rst_n) begin
    // compare before the edge's update
    checks++;
    if (empty !== (q.size() == 0) || full !== (q.size() == DEPTH) || count !== q.size()) begin
      failures++; $display("flags wrong: size %0d count %0d full %b empty %b", q.size(), count, full, empty);
    end
    if (rd_en) begin
      checks++;
      if (rd_data !== q[0]) begin failures++; $display("data %h expected %h", rd_data, q[0]); end
      void'(q.pop_front());
    end
    if (wr_en) q.push_back(wr_data);
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_data = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < DEPTH + 3; i++) step(1, 0);       // fill past full
    for (int i = 0; i < DEPTH + 3; i++) step(0, 1);       // drain past empty
    for (int i = 0; i < 4000; i++) step($urandom_range(0, 1), $urandom_range(0, 1));
    for (int i = 0; i < 200; i++) step($urandom_range(0, 3) != 0, $urandom_range(0, 3) == 0);
    for (int i = 0; i < 200; i++) step($urandom_range(0, 3) == 0, $urandom_range(0, 3) != 0);
    wr_en = 0; rd_en = 0;
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
