// axil_reg_model -- behavioural AXI4-Lite register file for testbenches,
// standing in for the register space of an IP outside the shell (RDMA
// engine, MAC). 64 registers; answers one clock after the request; counts
// accesses.
module axil_reg_model
  import reconic_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  axil_req_t  req,
  output axil_resp_t resp
);
  logic [31:0] regs [64];
  logic bv, rv;
  logic [31:0] rd;
  int accesses;
  always_comb begin
    resp = '0;
    resp.aw_ready = req.aw_valid && req.w_valid && !bv;
    resp.w_ready  = resp.aw_ready;
    resp.b_valid  = bv;
    resp.ar_ready = req.ar_valid && !rv;
    resp.r_valid  = rv;
    resp.r_data   = rd;
  end
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bv <= 0; rv <= 0; rd <= 0; accesses <= 0;
      for (int i = 0; i < 64; i++) regs[i] <= 0;
    end else begin
      if (bv && req.b_ready) bv <= 0;
      if (rv && req.r_ready) rv <= 0;
      if (resp.aw_ready) begin regs[req.aw_addr[7:2]] <= req.w_data; bv <= 1; accesses <= accesses + 1; end
      if (resp.ar_ready) begin rd <= regs[req.ar_addr[7:2]]; rv <= 1; accesses <= accesses + 1; end
    end
  end
endmodule
