// spike_subtracter: takes the spike trains of a positive and a negative
// neuron and passes the positive train with spikes removed, one positive spike
// blocked for each negative spike, so that over a window the output count is
// max(Y+ - Y-, 0): the ReLU of the signed dot product.
//
// A D flip-flop (BLK_W = 1, as drawn in the paper) remembers that a negative
// spike is waiting to block the next positive one. With BLK_W > 1 it becomes a
// saturating counter of pending blocks; that widening is our own option. With
// one flip-flop, a second negative spike that arrives before a positive spike
// has consumed the first block is lost, so the count is exact only when the
// negative spikes do not pile up. A positive and a negative spike in the same
// cycle cancel (our choice).
//
// Timing: out is combinational from pos, neg and the pending state; the state
// updates at the clock. clr (the window reset) drops pending blocks.
module spike_subtracter #(
  parameter int unsigned BLK_W = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  logic pos,
  input  logic neg,
  output logic out
);

  localparam logic [BLK_W-1:0] BLK_MAX = '1;

  logic [BLK_W-1:0] pend_q, pend_d;

  always_comb begin
    out    = 1'b0;
    pend_d = pend_q;
    if (pos && neg) begin
      out = 1'b0;                               // cancel each other
    end else if (pos) begin
      if (pend_q != '0) pend_d = pend_q - 1'b1; // blocked
      else              out    = 1'b1;
    end else if (neg) begin
      if (pend_q != BLK_MAX) pend_d = pend_q + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   pend_q <= '0;
    else if (clr) pend_q <= '0;
    else          pend_q <= pend_d;
  end

endmodule
