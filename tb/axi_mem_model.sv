// axi_mem_model -- behavioural AXI4 memory for testbenches (not synthesizable).
//
// Stands in for a memory behind an AXI4 subordinate port: the DDR4 device
// memory with its controller, or host memory behind the PCIe slave bridge.
// Storage is sparse (associative array of 64-byte beats, unwritten bytes read
// as zero). One read and one write burst are served at a time; INCR bursts of
// 64-byte beats. READ_LAT clocks pass between an accepted AR and the first R
// beat. peek32/poke32 give the testbench direct access; rd_bursts/wr_bursts
// count served bursts; last_rd_addr/last_wr_addr hold the latest addresses.
module axi_mem_model
  import reconic_pkg::*;
#(
  parameter int unsigned READ_LAT = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axi_req_t  req,
  output axi_resp_t resp
);
  logic [AXI_DATA_W-1:0] mem [longint unsigned];
  int unsigned rd_bursts, wr_bursts;
  logic [AXI_ADDR_W-1:0] last_rd_addr, last_wr_addr;

  function automatic logic [31:0] peek32(input logic [63:0] a);
    logic [AXI_DATA_W-1:0] b;
    b = mem.exists(a >> 6) ? mem[a >> 6] : '0;
    return b[32*a[5:2] +: 32];
  endfunction
  function automatic void poke32(input logic [63:0] a, input logic [31:0] d);
    logic [AXI_DATA_W-1:0] b;
    b = mem.exists(a >> 6) ? mem[a >> 6] : '0;
    b[32*a[5:2] +: 32] = d;
    mem[a >> 6] = b;
  endfunction
  function automatic logic [AXI_DATA_W-1:0] beat(input logic [63:0] idx);
    return mem.exists(idx) ? mem[idx] : '0;
  endfunction

  // write side: 0 wait AW, 1 take W beats, 2 answer B
  int unsigned wst;
  logic [63:0] wbeat_idx;
  logic [AXI_ID_W-1:0] wid;
  // read side: 0 wait AR, 1 latency, 2 send beats
  int unsigned rst_, rlat, rleft;
  logic [63:0] rbeat_idx;
  logic [AXI_ID_W-1:0] rid;

  always_comb begin
    resp = '0;
    resp.aw_ready = (wst == 0);
    resp.w_ready  = (wst == 1);
    resp.b_valid  = (wst == 2);
    resp.b.id     = wid;
    resp.b.resp   = AXI_RESP_OKAY;
    resp.ar_ready = (rst_ == 0);
    resp.r_valid  = (rst_ == 2);
    resp.r.id     = rid;
    resp.r.data   = beat(rbeat_idx);
    resp.r.resp   = AXI_RESP_OKAY;
    resp.r.last   = (rleft == 1);
  end

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wst <= 0; rst_ <= 0; rd_bursts <= 0; wr_bursts <= 0;
      wbeat_idx <= 0; rbeat_idx <= 0; wid <= 0; rid <= 0; rlat <= 0; rleft <= 0;
    end else begin
      case (wst)
        0: if (req.aw_valid) begin
          wbeat_idx <= req.aw.addr >> 6; wid <= req.aw.id; last_wr_addr <= req.aw.addr; wst <= 1;
        end
        1: if (req.w_valid) begin
          logic [AXI_DATA_W-1:0] b;
          b = beat(wbeat_idx);
          for (int k = 0; k < AXI_STRB_W; k++)
            if (req.w.strb[k]) b[8*k +: 8] = req.w.data[8*k +: 8];
          mem[wbeat_idx] = b;
          wbeat_idx <= wbeat_idx + 1;
          if (req.w.last) wst <= 2;
        end
        2: if (req.b_ready) begin wst <= 0; wr_bursts <= wr_bursts + 1; end
        default: wst <= 0;
      endcase
      case (rst_)
        0: if (req.ar_valid) begin
          rbeat_idx <= req.ar.addr >> 6; rid <= req.ar.id; rleft <= int'(req.ar.len) + 1;
          last_rd_addr <= req.ar.addr; rlat <= READ_LAT; rst_ <= (READ_LAT == 0) ? 2 : 1;
        end
        1: begin rlat <= rlat - 1; if (rlat == 1) rst_ <= 2; end
        2: if (req.r_ready) begin
          rbeat_idx <= rbeat_idx + 1; rleft <= rleft - 1;
          if (rleft == 1) begin rst_ <= 0; rd_bursts <= rd_bursts + 1; end
        end
        default: rst_ <= 0;
      endcase
    end
  end
endmodule
