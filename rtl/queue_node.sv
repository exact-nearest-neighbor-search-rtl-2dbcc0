// queue_node: one element of the kNN queue pipeline.
//
// The node stores one (distance, index) pair, or nothing (an empty node acts
// as if it held distance +infinity).  Each cycle it may receive one item:
//  - a pair not marked as a solution: if the node is empty or the new
//    distance is strictly smaller than the stored one, the node stores the new
//    pair and sends the old one on (operation A); otherwise it sends the new
//    pair on (operation B);
//  - a pair marked as a solution: the stored pair is marked as a solution and
//    sent on, and the received pair is stored (A without comparison);
//  - an end-of-stream marker: the stored pair is sent on marked as a solution,
//    then, one cycle later, the end-of-stream marker; the node is then empty
//    and ready for the next stream.
// So, while a stream flows, the node keeps the smallest pair it has seen; node
// n of a chain ends up holding the n-th smallest distance.
//
// Timing: one item per cycle, registered output.  The extra end-of-stream
// cycle needs the input to be idle in the cycle after an end-of-stream item,
// which holds in a chain because every node before it emits its end marker
// one cycle after its last solution.  Behaviour A/B, the solution marking and
// the two termination phases follow the original design.  An empty node
// storing a pair sends nothing on (instead of an empty pair) and an empty node
// still emits an empty "solution" at end of stream so that result slots stay
// aligned: both are this design's choices.
module queue_node
  import knn_pkg::*;
(
  input  logic   clk,
  input  logic   rst,
  input  logic   in_valid,
  input  qitem_t in_item,
  output logic   out_valid,
  output qitem_t out_item
);

  logic  full_q;    // node holds a pair
  pair_t pair_q;    // stored pair (delta_min, i_min)
  logic  eos_pend;  // end-of-stream marker still to be sent

  always_ff @(posedge clk) begin
    if (rst) begin
      full_q    <= 1'b0;
      pair_q    <= '0;
      eos_pend  <= 1'b0;
      out_valid <= 1'b0;
      out_item  <= '0;
    end else begin
      out_valid <= 1'b0;
      eos_pend  <= 1'b0;
      if (eos_pend) begin
        out_valid    <= 1'b1;
        out_item     <= '0;
        out_item.eos <= 1'b1;
      end else if (in_valid) begin
        if (in_item.eos) begin
          // release the stored pair as a solution, end marker follows
          out_valid     <= 1'b1;
          out_item.eos  <= 1'b0;
          out_item.sol  <= 1'b1;
          out_item.full <= full_q;
          out_item.pair <= pair_q;
          full_q        <= 1'b0;
          pair_q        <= '0;
          eos_pend      <= 1'b1;
        end else if (in_item.sol) begin
          // solution flowing towards the writer: swap without comparison
          out_valid     <= 1'b1;
          out_item.eos  <= 1'b0;
          out_item.sol  <= 1'b1;
          out_item.full <= full_q;
          out_item.pair <= pair_q;
          full_q        <= in_item.full;
          pair_q        <= in_item.pair;
        end else if (!full_q || (in_item.pair.dst < pair_q.dst)) begin
          // operation A: keep the new pair, push the old one on
          out_valid     <= full_q;
          out_item.eos  <= 1'b0;
          out_item.sol  <= 1'b0;
          out_item.full <= full_q;
          out_item.pair <= pair_q;
          full_q        <= 1'b1;
          pair_q        <= in_item.pair;
        end else begin
          // operation B: forward the new pair
          out_valid     <= 1'b1;
          out_item      <= in_item;
        end
      end
    end
  end

  // The input must be idle while the end-of-stream marker is being sent
  assert property (@(posedge clk) disable iff (rst) eos_pend |-> !in_valid)
    else $error("queue_node: item received during end-of-stream cycle");

endmodule
