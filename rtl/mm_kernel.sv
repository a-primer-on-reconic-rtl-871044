// mm_kernel -- lookaside-compute kernel: matrix multiplication C = A x B on a
// systolic array, driven by control messages and reporting to a status FIFO.
//
// Control message (32-bit words popped from the kernel's control FIFO):
//   word 0              {work_id[15:0], num_args[7:0], 8'h00}
//   words 1..2*num_args address arguments, 64 bits each, low word first;
//                       the kernel expects num_args = 3: A, B, C
//   last word           {8'h00, a_row[7:0], a_col[7:0], b_col[7:0]}
// The work ID, the argument count and the address list are the message the
// paper describes; the word layout and the dimension word are this design's.
// A (a_row x a_col), B (a_col x b_col) and C (a_row x b_col) are 32-bit
// integers stored row-major and contiguous, each starting on a 64-byte
// boundary. Dimensions must be 1..N (N = 16 by default).
//
// Operation: pop the message; read A then B with one AXI4 INCR burst each
// (64-byte beats, 16 words per beat) into local buffers; run the systolic
// array for a_col + 2N - 2 clocks, feeding row i of A and column j of B with
// i and j clocks of skew; pack C into 64-byte beats one word per clock and
// write it with one burst (the last beat's strobes cover only valid words);
// after the write response push the status word
//   {work_id[15:0], 8'h00, code[7:0]}  code 1 = done, 2 = bad arguments,
//   3 = bus error
// into the status FIFO. The host polls the status FIFO or takes an interrupt.
// The request's AXI ID (AXI_ID), size (64-byte beats) and burst type (INCR)
// are constant, so those outputs never toggle.
module mm_kernel
  import reconic_pkg::*;
#(
  parameter int unsigned N   = 16,
  parameter logic [AXI_ID_W-1:0] AXI_ID = '0
) (
  input  logic        clk,
  input  logic        rst_n,
  // control FIFO (read side)
  input  logic [31:0] ctrl_data,
  input  logic        ctrl_empty,
  output logic        ctrl_pop,
  // status FIFO (write side)
  output logic [31:0] stat_data,
  input  logic        stat_full,
  output logic        stat_push,
  // AXI4 data interface
  output axi_req_t    m_req,
  input  axi_resp_t   m_resp,
  // observation
  output logic        busy,
  output logic [15:0] compute_cycles     // enabled array clocks of the last job
);
  localparam int unsigned WPB  = AXI_DATA_W / 32;   // words per beat (16)
  localparam int unsigned NW   = N * N;
  localparam int unsigned IW   = $clog2(NW + 1);
  localparam int unsigned TW   = $clog2(3 * N + 1);

  typedef enum logic [3:0] {
    S_IDLE, S_ARGS, S_DIMS, S_RD_AR, S_RD_R, S_COMPUTE,
    S_WR_AW, S_PACK, S_WR_W, S_WR_B, S_STATUS
  } state_t;

  state_t       state;
  logic [15:0]  work_id;
  logic [7:0]   num_args;
  logic [8:0]   arg_idx;           // address words received
  logic [63:0]  addr [3];
  logic [7:0]   a_row, a_col, b_col;
  logic         rd_b;              // 0: reading A, 1: reading B
  logic [IW-1:0] rd_word;          // next buffer word to fill
  logic [7:0]   code;
  logic [31:0]  abuf [NW];
  logic [31:0]  bbuf [NW];
  logic [TW-1:0] t;                // systolic clock
  logic [7:0]   ci, cj;            // next C element to pack
  logic [IW-1:0] c_left;           // C words still to pack
  logic [$clog2(WPB+1)-1:0] widx;  // words in the packing register
  logic [AXI_DATA_W-1:0] wbeat;
  logic [AXI_STRB_W-1:0] wstrb;
  logic         wlast;

  // ---------------- systolic array ----------------
  logic [31:0] a_in [N];
  logic [31:0] b_in [N];
  logic [31:0] acc  [N][N];
  logic        sa_clear, sa_en;

  systolic_array #(.N(N), .W(32)) u_array (
    .clk, .clear(sa_clear), .en(sa_en), .a_in, .b_in, .acc
  );

  assign sa_clear = (state == S_RD_AR) && !rd_b;
  assign sa_en    = (state == S_COMPUTE);

  // skewed feeding: row i gets A[i][t-i], column j gets B[t-j][j]
  always_comb begin
    for (int i = 0; i < N; i++) begin
      automatic int k = int'(t) - i;
      a_in[i] = '0;
      b_in[i] = '0;
      if (k >= 0 && k < int'(a_col)) begin
        if (i < int'(a_row)) a_in[i] = abuf[IW'(i * int'(a_col) + k)];
        if (i < int'(b_col)) b_in[i] = bbuf[IW'(k * int'(b_col) + i)];
      end
    end
  end

  // ---------------- words of a matrix, bursts ----------------
  wire [IW-1:0] a_words = IW'(int'(a_row) * int'(a_col));
  wire [IW-1:0] b_words = IW'(int'(a_col) * int'(b_col));
  wire [IW-1:0] c_words = IW'(int'(a_row) * int'(b_col));
  function automatic logic [7:0] burst_len(input logic [IW-1:0] words);
    return 8'((int'(words) + WPB - 1) / WPB - 1);
  endfunction

  wire dims_ok = (ctrl_data[23:16] != 0) && (ctrl_data[15:8] != 0) && (ctrl_data[7:0] != 0)
              && (ctrl_data[23:16] <= 8'(N)) && (ctrl_data[15:8] <= 8'(N))
              && (ctrl_data[7:0] <= 8'(N)) && (num_args == 8'd3);

  // ---------------- AXI requests ----------------
  always_comb begin
    m_req = '0;
    m_req.ar.id    = AXI_ID;
    m_req.ar.addr  = rd_b ? addr[1] : addr[0];
    m_req.ar.len   = burst_len(rd_b ? b_words : a_words);
    m_req.ar.size  = AXI_SIZE_FULL;
    m_req.ar.burst = AXI_BURST_INCR;
    m_req.ar_valid = (state == S_RD_AR);
    m_req.r_ready  = (state == S_RD_R);
    m_req.aw.id    = AXI_ID;
    m_req.aw.addr  = addr[2];
    m_req.aw.len   = burst_len(c_words);
    m_req.aw.size  = AXI_SIZE_FULL;
    m_req.aw.burst = AXI_BURST_INCR;
    m_req.aw_valid = (state == S_WR_AW);
    m_req.w.data   = wbeat;
    m_req.w.strb   = wstrb;
    m_req.w.last   = wlast;
    m_req.w_valid  = (state == S_WR_W);
    m_req.b_ready  = (state == S_WR_B);
  end

  assign ctrl_pop  = !ctrl_empty && (state == S_IDLE || state == S_ARGS || state == S_DIMS);
  assign stat_push = (state == S_STATUS) && !stat_full;
  assign stat_data = {work_id, 8'h00, code};
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      work_id <= '0; num_args <= '0; arg_idx <= '0;
      for (int a = 0; a < 3; a++) addr[a] <= '0;
      a_row <= '0; a_col <= '0; b_col <= '0;
      rd_b <= 1'b0; rd_word <= '0; code <= '0; t <= '0;
      ci <= '0; cj <= '0; c_left <= '0; widx <= '0;
      wbeat <= '0; wstrb <= '0; wlast <= 1'b0;
      compute_cycles <= '0;
    end else begin
      case (state)
        S_IDLE: if (!ctrl_empty) begin
          work_id  <= ctrl_data[31:16];
          num_args <= ctrl_data[15:8];
          arg_idx  <= '0;
          code     <= LC_STAT_DONE;
          state    <= (ctrl_data[15:8] == 0) ? S_DIMS : S_ARGS;
        end
        S_ARGS: if (!ctrl_empty) begin
          if (arg_idx < 9'd6) begin
            if (!arg_idx[0]) addr[arg_idx[2:1]][31:0]  <= ctrl_data;
            else             addr[arg_idx[2:1]][63:32] <= ctrl_data;
          end
          arg_idx <= arg_idx + 1'b1;
          if (arg_idx + 1'b1 == {num_args, 1'b0}) state <= S_DIMS;
        end
        S_DIMS: if (!ctrl_empty) begin
          a_row <= ctrl_data[23:16];
          a_col <= ctrl_data[15:8];
          b_col <= ctrl_data[7:0];
          rd_b  <= 1'b0;
          rd_word <= '0;
          if (dims_ok) state <= S_RD_AR;
          else begin
            code  <= LC_STAT_BAD_ARG;
            state <= S_STATUS;
          end
        end
        S_RD_AR: if (m_resp.ar_ready) state <= S_RD_R;
        S_RD_R: if (m_resp.r_valid) begin
          for (int w = 0; w < WPB; w++) begin
            automatic logic [IW-1:0] idx = rd_word + IW'(w);
            if (idx < IW'(NW)) begin
              if (rd_b) bbuf[idx] <= m_resp.r.data[32*w +: 32];
              else      abuf[idx] <= m_resp.r.data[32*w +: 32];
            end
          end
          rd_word <= rd_word + IW'(WPB);
          if (m_resp.r.resp != AXI_RESP_OKAY) code <= LC_STAT_BUS_ERR;
          if (m_resp.r.last) begin
            rd_word <= '0;
            if (!rd_b) begin
              rd_b  <= 1'b1;
              state <= S_RD_AR;
            end else begin
              t     <= '0;
              state <= S_COMPUTE;
            end
          end
        end
        S_COMPUTE: begin
          t <= t + 1'b1;
          if (int'(t) == int'(a_col) + 2 * N - 3) begin
            compute_cycles <= 16'(int'(a_col) + 2 * N - 2);
            state <= S_WR_AW;
          end
        end
        S_WR_AW: if (m_resp.aw_ready) begin
          ci <= '0; cj <= '0; c_left <= c_words; wlast <= 1'b0;
          widx <= '0; wbeat <= '0; wstrb <= '0;
          state <= S_PACK;
        end
        S_PACK: begin
          wbeat[32*widx +: 32] <= acc[ci[$clog2(N)-1:0]][cj[$clog2(N)-1:0]];
          wstrb[4*widx +: 4]   <= 4'hF;
          widx   <= widx + 1'b1;
          c_left <= c_left - 1'b1;
          if (cj + 1'b1 == b_col) begin
            cj <= '0;
            ci <= ci + 1'b1;
          end else begin
            cj <= cj + 1'b1;
          end
          if (c_left == 1 || int'(widx) == WPB - 1) begin
            wlast <= (c_left == 1);
            state <= S_WR_W;
          end
        end
        S_WR_W: if (m_resp.w_ready) begin
          widx <= '0; wbeat <= '0; wstrb <= '0;
          state <= wlast ? S_WR_B : S_PACK;
        end
        S_WR_B: if (m_resp.b_valid) begin
          if (m_resp.b.resp != AXI_RESP_OKAY) code <= LC_STAT_BUS_ERR;
          state <= S_STATUS;
        end
        S_STATUS: if (!stat_full) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
