// double_buffer: ping-pong control of the two memory banks used to stream the
// dataset in the FQ-SD configuration.
//
// Partition i sent by the host is written to bank (i mod 2) and read by the
// distance computations from the same bank afterwards, while the host writes
// partition i+1 into the other bank.  The block keeps, per bank, whether it
// holds a partition not yet read ("full"), its vector count, the index of its
// first vector and whether it is the last partition of the dataset.
//
// Host side:   wr_bank is the bank to write; wr_ready says it is free.  After
//              the partition's words are written the host pulses commit with
//              commit_nvec (vectors in it) and commit_last.  A commit while
//              wr_ready is low is an error (assertion).
// Reader side: rd_avail says bank rd_bank holds a partition, described by
//              rd_nvec, rd_base (global index of its first vector) and
//              rd_last.  rd_release, pulsed when the partition has been read,
//              frees the bank and moves to the other one.
// clear (start of a run) empties both banks and restarts the indices at 0.
// Timing: all outputs come from registers; a commit or a release takes
// effect the next cycle.  The alternation of the banks follows the original
// design; the handshake and the bookkeeping are this design's choices.
module double_buffer
  import knn_pkg::*;
(
  input  logic clk,
  input  logic rst,
  input  logic clear,
  // host side
  output logic wr_bank,
  output logic wr_ready,
  input  logic commit,
  input  idx_t commit_nvec,
  input  logic commit_last,
  // reader side
  output logic rd_bank,
  output logic rd_avail,
  output idx_t rd_nvec,
  output idx_t rd_base,
  output logic rd_last,
  input  logic rd_release
);

  logic [1:0] full_q;
  idx_t       nvec_q [2];
  idx_t       base_q [2];
  logic [1:0] last_q;
  idx_t       next_base_q;
  logic       wr_q, rd_q;

  assign wr_bank  = wr_q;
  assign rd_bank  = rd_q;
  assign wr_ready = !full_q[wr_q];
  assign rd_avail = full_q[rd_q];
  assign rd_nvec  = nvec_q[rd_q];
  assign rd_base  = base_q[rd_q];
  assign rd_last  = last_q[rd_q];

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      full_q      <= '0;
      last_q      <= '0;
      wr_q        <= 1'b0;
      rd_q        <= 1'b0;
      next_base_q <= '0;
      nvec_q[0]   <= '0;
      nvec_q[1]   <= '0;
      base_q[0]   <= '0;
      base_q[1]   <= '0;
    end else begin
      if (commit && wr_ready) begin
        full_q[wr_q] <= 1'b1;
        nvec_q[wr_q] <= commit_nvec;
        base_q[wr_q] <= next_base_q;
        last_q[wr_q] <= commit_last;
        next_base_q  <= next_base_q + commit_nvec;
        wr_q         <= !wr_q;
      end
      if (rd_release && rd_avail) begin
        full_q[rd_q] <= 1'b0;
        rd_q         <= !rd_q;
      end
    end
  end

  assert property (@(posedge clk) disable iff (rst) commit |-> wr_ready)
    else $error("double_buffer: commit to a bank that is still full");
  assert property (@(posedge clk) disable iff (rst) rd_release |-> rd_avail)
    else $error("double_buffer: release of an empty bank");

endmodule
