// full_adder: last pipeline of the distance computation.
//
// Activated once per query/vector pair: it sums the M elements of the array
// B received from the vector adder into the squared Euclidean distance and
// emits it with the vector's index as a queue item.  An end-of-stream token
// becomes an end-of-stream queue item.
//
// Timing: one array per cycle, output registered one cycle later.  The
// reduction follows the original design; the queue-item output format is
// this design's choice.
// The item's solution bit is always 0 here: only the queue nodes set it, when
// they push out their contents at the end of a stream, and the item format is
// shared so that one type travels from the adder to the queue writer.
module full_adder
  import knn_pkg::*;
#(
  parameter int unsigned M_P   = M_ACC,
  parameter int unsigned ACC_P = DIST_W
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  input  logic             in_eos,
  input  idx_t             in_idx,
  input  logic [ACC_P-1:0] in_b [M_P],
  output logic             out_valid,
  output qitem_t           out_item
);

  dist_t sum;

  always_comb begin
    sum = '0;
    for (int i = 0; i < M_P; i++) sum = sum + dist_t'(in_b[i]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_item  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_item.eos       <= in_eos;
        out_item.sol       <= 1'b0;
        out_item.full      <= !in_eos;
        out_item.pair.dst <= in_eos ? '0 : sum;
        out_item.pair.idx  <= in_eos ? '0 : in_idx;
      end
    end
  end

endmodule
