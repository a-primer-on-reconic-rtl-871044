// tb_sys_crossbar -- five managers (the RDMA engine's AXI4 ports) write and
// read bursts concurrently to host and device addresses. Checks that each
// burst lands in the right memory (device only for the 0xA35 tag), reads
// return the written data with the manager's ID, the routing counters, and
// that both subordinates were busy at the same time at least once.
module tb_sys_crossbar;
  import reconic_pkg::*;
  localparam int NM = 5;
  logic clk = 0, rst_n = 0;
  axi_req_t  rdma_req  [NM];
  axi_resp_t rdma_resp [NM];
  axi_req_t  host_req, dev_req;
  axi_resp_t host_resp, dev_resp;
  logic [31:0] host_txn_count, dev_txn_count;
  int checks = 0, failures = 0, overlap = 0;

  sys_crossbar #(.NM(NM)) dut (.*);
  axi_mem_model #(.READ_LAT(20)) host_mem (.clk, .rst_n, .req(host_req), .resp(host_resp));
  axi_mem_model #(.READ_LAT(3))  dev_mem  (.clk, .rst_n, .req(dev_req),  .resp(dev_resp));
  for (genvar m = 0; m < NM; m++) begin : g_m
    axi_master_bfm #(.ID(AXI_ID_W'(m + 1))) bfm (.clk, .req(rdma_req[m]), .resp(rdma_resp[m]));
  end
  always #5 clk = ~clk;

  always @(posedge clk)
    if ((host_req.w_valid || host_resp.r_valid) && (dev_req.w_valid || dev_resp.r_valid)) overlap++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] addr_of(input int m, input int j, input bit dev);
    logic [63:0] off = 64'(m * 32'h10000 + j * 32'h400);
    return dev ? (64'hA350_0000_0000_0000 | off) : (64'h0000_0001_0000_0000 | off);
  endfunction

  task automatic traffic(input int m);
    int e;
    for (int j = 0; j < 6; j++) begin
      bit dev = ((m + j) % 2) == 0;
      int n = 1 + (m + 3 * j) % 8;
      case (m)
        0: g_m[0].bfm.write_burst(addr_of(m, j, dev), n, 32'(m * 100 + j));
        1: g_m[1].bfm.write_burst(addr_of(m, j, dev), n, 32'(m * 100 + j));
        2: g_m[2].bfm.write_burst(addr_of(m, j, dev), n, 32'(m * 100 + j));
        3: g_m[3].bfm.write_burst(addr_of(m, j, dev), n, 32'(m * 100 + j));
        default: g_m[4].bfm.write_burst(addr_of(m, j, dev), n, 32'(m * 100 + j));
      endcase
      case (m)
        0: g_m[0].bfm.read_check(addr_of(m, j, dev), n, 32'(m * 100 + j), e);
        1: g_m[1].bfm.read_check(addr_of(m, j, dev), n, 32'(m * 100 + j), e);
        2: g_m[2].bfm.read_check(addr_of(m, j, dev), n, 32'(m * 100 + j), e);
        3: g_m[3].bfm.read_check(addr_of(m, j, dev), n, 32'(m * 100 + j), e);
        default: g_m[4].bfm.read_check(addr_of(m, j, dev), n, 32'(m * 100 + j), e);
      endcase
      checks++;
      if (e != 0) begin failures++; $display("manager %0d burst %0d: %0d read errors", m, j, e); end
      // the other memory must not hold it
      checks++;
      if ((dev ? host_mem.peek32(addr_of(m, j, dev)) : dev_mem.peek32(addr_of(m, j, dev)))
          !== 32'h0 ||
          (dev ? dev_mem.peek32(addr_of(m, j, dev)) : host_mem.peek32(addr_of(m, j, dev)))
          !== g_m[0].bfm.pattern(addr_of(m, j, dev), 0, 0, 32'(m * 100 + j))) begin
        failures++; $display("manager %0d burst %0d routed to the wrong memory", m, j);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    fork
      traffic(0); traffic(1); traffic(2); traffic(3); traffic(4);
    join
    checks++;
    if (host_txn_count != 30 || dev_txn_count != 30) begin
      failures++; $display("counts host %0d dev %0d", host_txn_count, dev_txn_count);
    end
    checks++;
    if (overlap == 0) begin failures++; $display("host and device never busy together"); end
    // the tag must match all 12 bits: 0xA34... goes to the host
    g_m[0].bfm.write32(64'hA340_0000_0000_0040, 32'hCAFE_F00D);
    checks++;
    if (host_mem.peek32(64'hA340_0000_0000_0040) !== 32'hCAFE_F00D) begin
      failures++; $display("0xA34 tag not sent to host");
    end
    $display("overlap cycles %0d", overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
