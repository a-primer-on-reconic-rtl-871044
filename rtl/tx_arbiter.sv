// tx_arbiter -- merges the RDMA transmit stream and the non-RDMA (host)
// transmit stream into the one stream the MAC sends.
//
// Arbitration is per frame and round robin: when both inputs have a frame
// waiting, the input that did not send the previous frame goes first; once a
// frame has started its input keeps the output until the beat with tlast, so
// frames never interleave. The paper names the arbiter and its two inputs;
// round robin per frame is this design's choice.
//
// Timing: the output is combinational from the granted input (no register),
// a new frame can start on the clock after the previous tlast beat was taken,
// or on the same clock for the first frame after idle.
module tx_arbiter
  import reconic_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  axis_t       rdma_tx,
  output logic        rdma_tx_ready,
  input  axis_t       nonrdma_tx,
  output logic        nonrdma_tx_ready,
  output axis_t       tx_out,
  input  logic        tx_out_ready,
  output logic [31:0] contention_count  // frames started while both inputs waited
);
  logic locked;      // a frame is in progress
  logic owner;       // 1: RDMA input, 0: non-RDMA input (current / last frame)
  logic pick;        // input to grant when not locked

  always_comb begin
    if (rdma_tx.tvalid && nonrdma_tx.tvalid) pick = !owner;
    else                                     pick = rdma_tx.tvalid;
  end

  wire sel = locked ? owner : pick;

  always_comb begin
    tx_out           = sel ? rdma_tx : nonrdma_tx;
    rdma_tx_ready    = sel && tx_out_ready;
    nonrdma_tx_ready = !sel && tx_out_ready;
  end

  wire beat = tx_out.tvalid && tx_out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0;
      owner  <= 1'b0;
      contention_count <= '0;
    end else if (beat) begin
      if (!locked) begin
        owner <= sel;
        if (rdma_tx.tvalid && nonrdma_tx.tvalid) contention_count <= contention_count + 1;
      end
      locked <= !tx_out.tlast;
    end
  end

  // A frame, once started, is not interleaved with the other input.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           locked |-> sel == owner);
endmodule
