// knn_queue: the kNN queue, a pipeline of K_P + 2 elements that keeps the k
// pairs of smallest distance of a stream.
//
// Structure: reader -> queue_node x K_P -> writer.  The reader registers the
// items coming from a distance computation (pairs and the end-of-stream
// marker) and forwards them.  Each queue_node keeps the smallest pair it has
// seen and forwards the others, so after a stream the i-th node holds the
// i-th nearest vector.  The end-of-stream marker makes the nodes release
// their pairs as solutions, which flow to the queue_writer and are stored
// sorted by increasing distance.
//
// The K_P nodes are cut into NSEG_P segments of KS = K_P/NSEG_P nodes, each
// with its own reader input and a tap to the writer.  With split = 1 the
// segments work as NSEG_P independent queues of cutoff KS (one per query of a
// batch); with split = 0 they are chained into one queue of cutoff K_P fed by
// input 0.  split must not change while a stream is in the queue.
//
// Timing: one item per cycle per input, no back-pressure.  Every node sends
// the end marker one cycle after its last solution, so the marker slows down
// by one cycle per node: a stream's results are complete about 2*K_P (or
// 2*KS) cycles after its end-of-stream item enters, when done is set (see
// queue_writer).  A new stream may enter after done.
// The node pipeline, reader and writer follow the original design, as does
// the run-time partitioning into M pipelines of k/M nodes; how the segments
// are switched is this design's choice.
module knn_queue
  import knn_pkg::*;
#(
  parameter int unsigned K_P    = 1024,
  parameter int unsigned NSEG_P = 16
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   clear,
  input  logic                   split,
  input  logic                   in_valid [NSEG_P],
  input  qitem_t                 in_item  [NSEG_P],
  output logic [NSEG_P-1:0]      done,
  input  logic [$clog2(K_P)-1:0] rd_addr,
  output qitem_t                 rd_item
);

  localparam int unsigned KS = K_P / NSEG_P;

  // reader stage
  logic   rd_v [NSEG_P];
  qitem_t rd_i [NSEG_P];

  always_ff @(posedge clk) begin
    for (int j = 0; j < NSEG_P; j++) begin
      if (rst) begin
        rd_v[j] <= 1'b0;
        rd_i[j] <= '0;
      end else begin
        rd_v[j] <= in_valid[j];
        rd_i[j] <= in_item[j];
      end
    end
  end

  // node chain
  logic   nv_in  [K_P];
  qitem_t ni_in  [K_P];
  logic   nv_out [K_P];
  qitem_t ni_out [K_P];

  for (genvar n = 0; n < K_P; n++) begin : g_node
    if (n == 0) begin : g_head0
      assign nv_in[n] = rd_v[0];
      assign ni_in[n] = rd_i[0];
    end else if (n % KS == 0) begin : g_head
      assign nv_in[n] = split ? rd_v[n / KS] : nv_out[n-1];
      assign ni_in[n] = split ? rd_i[n / KS] : ni_out[n-1];
    end else begin : g_body
      assign nv_in[n] = nv_out[n-1];
      assign ni_in[n] = ni_out[n-1];
    end

    queue_node u_node (
      .clk, .rst,
      .in_valid (nv_in[n]),  .in_item (ni_in[n]),
      .out_valid(nv_out[n]), .out_item(ni_out[n])
    );
  end

  // writer taps at segment tails
  logic   tail_v [NSEG_P];
  qitem_t tail_i [NSEG_P];

  for (genvar j = 0; j < NSEG_P; j++) begin : g_tail
    assign tail_v[j] = nv_out[(j+1)*KS - 1];
    assign tail_i[j] = ni_out[(j+1)*KS - 1];
  end

  queue_writer #(.K_P(K_P), .NSEG_P(NSEG_P)) u_writer (
    .clk, .rst, .clear, .split,
    .seg_valid(tail_v), .seg_item(tail_i),
    .done, .rd_addr, .rd_item
  );

endmodule
