// distance_merger: joins the pair streams of N_P distance computations into
// the single kNN queue shared by all of them in the FD-SQ configuration.
//
// Each input has a FIFO of FIFO_P items.  Every cycle one pair is taken from
// the FIFOs in round-robin order and sent to the queue, so the queue sees at
// most one item per cycle.  An end-of-stream item at the head of a FIFO is
// removed and remembered; when every input has delivered its end-of-stream
// and all FIFOs are empty, a single end-of-stream item is sent.
// stall[i] rises when FIFO i holds FIFO_P - SLACK_P items or more; it must
// stop the source of input i early enough that the items still in flight
// (read latency plus the distance pipeline, at most SLACK_P) fit.
// Timing: registered output; one pair per cycle in total.  The common queue
// fed by all distance computations follows the original design; the FIFOs,
// the round-robin order and the stall signal are this design's choices.
module distance_merger
  import knn_pkg::*;
#(
  parameter int unsigned N_P     = 16,
  parameter int unsigned FIFO_P  = 16,
  parameter int unsigned SLACK_P = 8
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          in_valid [N_P],
  input  qitem_t        in_item  [N_P],
  output logic [N_P-1:0] stall,
  output logic          out_valid,
  output qitem_t        out_item
);

  localparam int unsigned PW = $clog2(FIFO_P);
  localparam int unsigned CW = $clog2(FIFO_P + 1);
  localparam int unsigned SW = (N_P > 1) ? $clog2(N_P) : 1;

  qitem_t         fifo  [N_P][FIFO_P];
  logic [PW-1:0]  wp_q  [N_P];
  logic [PW-1:0]  rp_q  [N_P];
  logic [CW-1:0]  cnt_q [N_P];
  logic [N_P-1:0] eos_seen_q;
  logic [SW-1:0]  rr_q;

  qitem_t         head  [N_P];
  logic [N_P-1:0] has_pair, pop_eos, pop;
  logic           grant_v;
  logic [SW-1:0]  grant;
  logic           all_done;

  always_comb begin
    for (int i = 0; i < N_P; i++) begin
      head[i]     = fifo[i][rp_q[i]];
      has_pair[i] = (cnt_q[i] != '0) && !head[i].eos;
      pop_eos[i]  = (cnt_q[i] != '0) &&  head[i].eos;
      stall[i]    = (cnt_q[i] >= CW'(FIFO_P - SLACK_P));
    end
    // round robin starting at rr_q
    grant_v = 1'b0;
    grant   = '0;
    for (int k = 0; k < N_P; k++) begin
      logic [SW-1:0] c;
      c = SW'((int'(rr_q) + k) % N_P);
      if (!grant_v && has_pair[c]) begin
        grant_v = 1'b1;
        grant   = SW'(c);
      end
    end
    pop = pop_eos;
    if (grant_v) pop[grant] = 1'b1;
    all_done = (&eos_seen_q);
    for (int i = 0; i < N_P; i++) if (cnt_q[i] != '0) all_done = 1'b0;
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < N_P; i++) begin
      if (in_valid[i]) fifo[i][wp_q[i]] <= in_item[i];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < N_P; i++) begin
        wp_q[i]  <= '0;
        rp_q[i]  <= '0;
        cnt_q[i] <= '0;
      end
      eos_seen_q <= '0;
      rr_q       <= '0;
      out_valid  <= 1'b0;
      out_item   <= '0;
    end else begin
      for (int i = 0; i < N_P; i++) begin
        if (in_valid[i]) wp_q[i] <= wp_q[i] + 1'b1;
        if (pop[i])      rp_q[i] <= rp_q[i] + 1'b1;
        cnt_q[i] <= cnt_q[i] + CW'(in_valid[i]) - CW'(pop[i]);
      end
      out_valid <= 1'b0;
      if (grant_v) begin
        out_valid <= 1'b1;
        out_item  <= head[grant];
        rr_q      <= (grant == SW'(N_P - 1)) ? '0 : grant + 1'b1;
      end else if (all_done) begin
        out_valid    <= 1'b1;
        out_item     <= '0;
        out_item.eos <= 1'b1;
      end
      if (!grant_v && all_done) eos_seen_q <= '0;
      else                      eos_seen_q <= eos_seen_q | pop_eos;
    end
  end

  for (genvar i = 0; i < N_P; i++) begin : g_chk
    assert property (@(posedge clk) disable iff (rst) in_valid[i] |-> (cnt_q[i] < CW'(FIFO_P) || pop[i]))
      else $error("distance_merger: FIFO %0d overflow", i);
  end

endmodule
