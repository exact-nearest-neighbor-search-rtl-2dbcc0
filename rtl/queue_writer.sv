// queue_writer: last element of the kNN queue; stores the kNN results.
//
// It watches the tail of each of the NSEG_P queue segments.  Pairs not marked
// as a solution are dropped.  Pairs marked as a solution are written into the
// result array in the reverse order of their arrival: the tail node releases
// the k-th smallest distance first and the smallest last, so the array ends
// up sorted by increasing distance.  An end-of-stream item closes a result
// and raises that segment's done flag.
//
// Two layouts, chosen by split (constant during a run):
//  split = 1  NSEG_P independent queues of KS = K_P/NSEG_P nodes; queue j
//             fills result slots j*KS .. j*KS+KS-1 (nearest first).
//  split = 0  one queue of K_P nodes; only the last segment's tail is used
//             and it fills slots 0 .. K_P-1; done[NSEG_P-1] closes it.
// The array is banked by segment so that all queues can write in the same
// cycle.  Slots of a query that saw fewer than k vectors hold full = 0.
// clear drops all done flags and write counters before a new run.
// Read port: rd_addr -> rd_item one cycle later (sol is always 1 there).
// Reverse-order storage follows the original design; the banked layout, the
// done flags and the read port are this design's choices.
module queue_writer
  import knn_pkg::*;
#(
  parameter int unsigned K_P    = 1024,
  parameter int unsigned NSEG_P = 16
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   clear,
  input  logic                   split,
  input  logic                   seg_valid [NSEG_P],
  input  qitem_t                 seg_item  [NSEG_P],
  output logic [NSEG_P-1:0]      done,
  input  logic [$clog2(K_P)-1:0] rd_addr,
  output qitem_t                 rd_item
);

  localparam int unsigned KS    = K_P / NSEG_P;
  localparam int unsigned AW    = $clog2(K_P);
  localparam int unsigned CNT_W = $clog2(K_P + 1);
  localparam int unsigned SEL_W = (NSEG_P > 1) ? $clog2(NSEG_P) : 1;
  localparam int unsigned OFF_W = (KS > 1) ? $clog2(KS) : 1;

  logic [CNT_W-1:0] cnt_q [NSEG_P];

  // whole-queue write target
  localparam int unsigned LAST = NSEG_P - 1;
  logic [AW-1:0]  whole_addr;
  logic           whole_we;
  assign whole_addr = AW'(K_P - 1) - AW'(cnt_q[LAST]);
  assign whole_we   = seg_valid[LAST] && seg_item[LAST].sol && !seg_item[LAST].eos
                      && (cnt_q[LAST] < CNT_W'(K_P));

  qitem_t bank_rd [NSEG_P];
  logic [SEL_W-1:0] rd_sel_q;

  for (genvar j = 0; j < NSEG_P; j++) begin : g_bank
    qitem_t           mem [KS];
    logic             we;
    logic [OFF_W-1:0] wa;
    qitem_t           wd;

    always_comb begin
      if (split) begin
        we = seg_valid[j] && seg_item[j].sol && !seg_item[j].eos && (cnt_q[j] < CNT_W'(KS));
        wa = OFF_W'(KS - 1) - OFF_W'(cnt_q[j]);
        wd = seg_item[j];
      end else begin
        we = whole_we && (32'(whole_addr) / KS == j);
        wa = OFF_W'(32'(whole_addr) % KS);
        wd = seg_item[LAST];
      end
    end

    always_ff @(posedge clk) begin
      if (we) mem[wa] <= wd;
      bank_rd[j] <= mem[OFF_W'(32'(rd_addr) % KS)];
    end

    // per-segment write counter and done flag
    always_ff @(posedge clk) begin
      if (rst || clear) begin
        cnt_q[j] <= '0;
        done[j]  <= 1'b0;
      end else if (seg_valid[j] && (split || j == LAST)) begin
        if (seg_item[j].eos) begin
          cnt_q[j] <= '0;
          done[j]  <= 1'b1;
        end else if (seg_item[j].sol) begin
          cnt_q[j] <= cnt_q[j] + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) rd_sel_q <= SEL_W'(32'(rd_addr) / KS);
  assign rd_item = bank_rd[rd_sel_q];

endmodule
