// axi_master_bfm -- behavioural AXI4 manager for testbenches.
//
// write_burst writes n 64-byte beats from address a, word w of beat i holding
// pattern(a, i, w, seed); read_check reads them back and returns the number of
// words that differ. write32 / read32 move one 32-bit word with one beat.
// Signals change 1 time unit after a falling clock edge and handshakes are
// judged just before the rising edge, so there is no race with the design.
module axi_master_bfm
  import reconic_pkg::*;
#(
  parameter logic [AXI_ID_W-1:0] ID = '0
) (
  input  logic      clk,
  output axi_req_t  req,
  input  axi_resp_t resp
);
  initial req = '0;

  function automatic logic [31:0] pattern(input logic [63:0] a, input int i, input int w,
                                          input logic [31:0] seed);
    return (a[31:0] ^ seed) + 32'(i * 16 + w) * 32'h9E37_79B1;
  endfunction

  task automatic write_beats(input logic [63:0] a, input int n, input logic [31:0] seed,
                             input logic [AXI_STRB_W-1:0] strb, input logic [31:0] word,
                             input bit single);
    @(negedge clk); #1;
    req.aw.id = ID; req.aw.addr = a; req.aw.len = 8'(n - 1);
    req.aw.size = AXI_SIZE_FULL; req.aw.burst = AXI_BURST_INCR; req.aw_valid = 1'b1;
    #1; while (!resp.aw_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    req.aw_valid = 1'b0;
    for (int i = 0; i < n; i++) begin
      logic [AXI_DATA_W-1:0] d;
      for (int w = 0; w < 16; w++) d[32*w +: 32] = single ? word : pattern(a, i, w, seed);
      req.w.data = d; req.w.strb = strb; req.w.last = (i == n - 1); req.w_valid = 1'b1;
      #1; while (!resp.w_ready) begin @(negedge clk); #1; end
      @(posedge clk); #1;
      req.w_valid = 1'b0;
    end
    req.b_ready = 1'b1;
    #1; while (!resp.b_valid) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    req.b_ready = 1'b0;
  endtask

  task automatic write_burst(input logic [63:0] a, input int n, input logic [31:0] seed);
    write_beats(a, n, seed, '1, 32'h0, 1'b0);
  endtask

  task automatic write32(input logic [63:0] a, input logic [31:0] d);
    logic [AXI_STRB_W-1:0] s;
    s = '0; s[4*a[5:2] +: 4] = 4'hF;
    write_beats({a[63:6], 6'h0}, 1, 32'h0, s, d, 1'b1);
  endtask

  task automatic read_beats(input logic [63:0] a, input int n, input logic [31:0] seed,
                            input bit check, output int errors, output logic [AXI_DATA_W-1:0] first);
    errors = 0;
    first = '0;
    @(negedge clk); #1;
    req.ar.id = ID; req.ar.addr = a; req.ar.len = 8'(n - 1);
    req.ar.size = AXI_SIZE_FULL; req.ar.burst = AXI_BURST_INCR; req.ar_valid = 1'b1;
    #1; while (!resp.ar_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    req.ar_valid = 1'b0;
    req.r_ready = 1'b1;
    for (int i = 0; i < n; i++) begin
      #1; while (!resp.r_valid) begin @(negedge clk); #1; end
      if (i == 0) first = resp.r.data;
      if (check)
        for (int w = 0; w < 16; w++)
          if (resp.r.data[32*w +: 32] !== pattern(a, i, w, seed)) errors++;
      if (resp.r.last !== (i == n - 1)) errors++;
      if (resp.r.id !== ID) errors++;
      @(posedge clk); #1;
    end
    req.r_ready = 1'b0;
  endtask

  task automatic read_check(input logic [63:0] a, input int n, input logic [31:0] seed,
                            output int errors);
    logic [AXI_DATA_W-1:0] f;
    read_beats(a, n, seed, 1'b1, errors, f);
  endtask

  task automatic read32(input logic [63:0] a, output logic [31:0] d);
    int e; logic [AXI_DATA_W-1:0] f;
    read_beats({a[63:6], 6'h0}, 1, 32'h0, 1'b0, e, f);
    d = f[32*a[5:2] +: 32];
  endtask
endmodule
