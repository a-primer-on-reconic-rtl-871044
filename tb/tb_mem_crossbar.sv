// tb_mem_crossbar -- three managers (QDMA, sys_crossbar, lookaside compute)
// share one memory. Checks data integrity under concurrent bursts, that the
// 0xA35 tag is stripped to a 34-bit memory offset (tagged and untagged
// addresses reach the same location), and that every manager was made to
// wait for another at least once (arbitration happened).
module tb_mem_crossbar;
  import reconic_pkg::*;
  localparam int NM = 3;
  logic clk = 0, rst_n = 0;
  axi_req_t  m_req  [NM];
  axi_resp_t m_resp [NM];
  axi_req_t  mem_req;
  axi_resp_t mem_resp;
  int checks = 0, failures = 0;
  int waited [NM];

  mem_crossbar #(.NM(NM)) dut (.*);
  axi_mem_model #(.READ_LAT(5)) ddr (.clk, .rst_n, .req(mem_req), .resp(mem_resp));
  for (genvar m = 0; m < NM; m++) begin : g_m
    axi_master_bfm #(.ID(AXI_ID_W'(m))) bfm (.clk, .req(m_req[m]), .resp(m_resp[m]));
    // a manager waits when its AW/AR is pending while another owns the port
    always @(posedge clk)
      if ((m_req[m].aw_valid && dut.u_core.w_busy[0] && dut.u_core.w_owner[0] != 2'(m)) ||
          (m_req[m].ar_valid && dut.u_core.r_busy[0] && dut.u_core.r_owner[0] != 2'(m)))
        waited[m]++;
  end
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic traffic(input int m);
    int e;
    for (int j = 0; j < 8; j++) begin
      logic [63:0] a = 64'(m * 32'h100000 + j * 32'h1000);
      logic [63:0] wa = (j % 2 == 1) ? (a | 64'hA350_0000_0000_0000) : a;
      case (m)
        0: begin g_m[0].bfm.write_burst(wa, 1 + j, 32'(m * 10 + j)); g_m[0].bfm.read_check(a, 1 + j, 32'(m * 10 + j), e); end
        1: begin g_m[1].bfm.write_burst(wa, 1 + j, 32'(m * 10 + j)); g_m[1].bfm.read_check(a, 1 + j, 32'(m * 10 + j), e); end
        default: begin g_m[2].bfm.write_burst(wa, 1 + j, 32'(m * 10 + j)); g_m[2].bfm.read_check(a, 1 + j, 32'(m * 10 + j), e); end
      endcase
      if (j % 2 == 0) begin
        checks++;
        if (e != 0) begin failures++; $display("manager %0d burst %0d: %0d read errors", m, j, e); end
      end
      // read_check computes the pattern from the read address; the write used
      // wa, so compare against memory directly as well
      checks++;
      if (ddr.peek32(a) !== g_m[0].bfm.pattern(wa, 0, 0, 32'(m * 10 + j))) begin
        failures++; $display("manager %0d burst %0d: word at offset %h wrong", m, j, a);
      end
    end
  endtask

  initial begin
    for (int m = 0; m < NM; m++) waited[m] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    fork traffic(0); traffic(1); traffic(2); join
    for (int m = 0; m < NM; m++) begin
      checks++;
      if (waited[m] == 0) begin failures++; $display("manager %0d never arbitrated", m); end
    end
    checks++;
    if (ddr.last_wr_addr[63:34] !== '0) begin failures++; $display("tag not stripped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
