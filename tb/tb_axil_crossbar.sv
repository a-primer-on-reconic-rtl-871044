// tb_axil_crossbar -- four register subordinates behind the control crossbar,
// each a small behavioural register file that answers with its own index in
// the top byte. Checks that writes and reads reach the window selected by
// address bits [21:20], that data and responses come back, and that an
// address outside all windows gets DECERR without reaching any subordinate.
module tb_axil_crossbar;
  import reconic_pkg::*;
  localparam int NS = 4;
  logic clk = 0, rst_n = 0;
  axil_req_t  m_req;
  axil_resp_t m_resp;
  axil_req_t  s_req  [NS];
  axil_resp_t s_resp [NS];
  int checks = 0, failures = 0;
  int hits [NS];

  axil_crossbar #(.NS(NS)) dut (.*);
  axil_master_bfm host (.clk, .req(m_req), .resp(m_resp));

  // behavioural subordinates: 16 registers each, one clock to answer
  for (genvar s = 0; s < NS; s++) begin : g_s
    logic [31:0] regs [16];
    logic bv, rv; logic [31:0] rd;
    always_comb begin
      s_resp[s] = '0;
      s_resp[s].aw_ready = s_req[s].aw_valid && s_req[s].w_valid && !bv;
      s_resp[s].w_ready  = s_resp[s].aw_ready;
      s_resp[s].b_valid  = bv;
      s_resp[s].ar_ready = s_req[s].ar_valid && !rv;
      s_resp[s].r_valid  = rv;
      s_resp[s].r_data   = rd;
    end
    always @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin bv <= 0; rv <= 0; rd <= 0; for (int i = 0; i < 16; i++) regs[i] <= 0; end
      else begin
        if (bv && s_req[s].b_ready) bv <= 0;
        if (rv && s_req[s].r_ready) rv <= 0;
        if (s_resp[s].aw_ready) begin
          regs[s_req[s].aw_addr[5:2]] <= s_req[s].w_data; bv <= 1; hits[s]++;
        end
        if (s_resp[s].ar_ready) begin
          rd <= {8'(s), regs[s_req[s].ar_addr[5:2]][23:0]}; rv <= 1; hits[s]++;
        end
      end
    end
  end
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d; logic [1:0] r; int total;
    for (int s = 0; s < NS; s++) hits[s] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      int s, k;
      logic [31:0] v;
      s = $urandom_range(0, NS - 1);
      k = $urandom_range(0, 15);
      v = $urandom & 32'h00FF_FFFF;
      host.write(32'(s << 20) | 32'(k * 4), v, r);
      checks++; if (r !== AXI_RESP_OKAY) begin failures++; $display("write resp %0d", r); end
      host.read(32'(s << 20) | 32'(k * 4), d, r);
      checks++;
      if (d !== {8'(s), v[23:0]} || r !== AXI_RESP_OKAY) begin
        failures++; $display("window %0d reg %0d read %h", s, k, d);
      end
    end
    total = 0; for (int s = 0; s < NS; s++) total += hits[s];
    host.write(32'h0040_0000, 32'h1, r);
    checks++; if (r !== AXI_RESP_DECERR) begin failures++; $display("no DECERR on write"); end
    host.read(32'h0F00_0010, d, r);
    checks++; if (r !== AXI_RESP_DECERR) begin failures++; $display("no DECERR on read"); end
    begin
      int t2 = 0; for (int s = 0; s < NS; s++) t2 += hits[s];
      checks++; if (t2 != total || total != 80) begin failures++; $display("hits %0d %0d", total, t2); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
