// axil_master_bfm -- behavioural AXI4-Lite manager for testbenches.
// write(a, d, resp) and read(a, d, resp) perform one access each and wait
// for the response. Signals change 1 time unit after a clock edge and
// handshakes are judged just before the rising edge.
module axil_master_bfm
  import reconic_pkg::*;
(
  input  logic       clk,
  output axil_req_t  req,
  input  axil_resp_t resp
);
  initial req = '0;

  task automatic write(input logic [31:0] a, input logic [31:0] d, output logic [1:0] r);
    @(negedge clk); #1;
    req.aw_addr = a; req.aw_valid = 1'b1;
    req.w_data = d; req.w_strb = 4'hF; req.w_valid = 1'b1;
    #1; while (!(resp.aw_ready && resp.w_ready)) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    req.aw_valid = 1'b0; req.w_valid = 1'b0;
    req.b_ready = 1'b1;
    #1; while (!resp.b_valid) begin @(negedge clk); #1; end
    r = resp.b_resp;
    @(posedge clk); #1;
    req.b_ready = 1'b0;
  endtask

  task automatic read(input logic [31:0] a, output logic [31:0] d, output logic [1:0] r);
    @(negedge clk); #1;
    req.ar_addr = a; req.ar_valid = 1'b1;
    #1; while (!resp.ar_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    req.ar_valid = 1'b0;
    req.r_ready = 1'b1;
    #1; while (!resp.r_valid) begin @(negedge clk); #1; end
    d = resp.r_data; r = resp.r_resp;
    @(posedge clk); #1;
    req.r_ready = 1'b0;
  endtask
endmodule
