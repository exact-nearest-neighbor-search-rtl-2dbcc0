// distance_computation: turns a stream of dataset vectors into a stream of
// (squared distance, index) pairs against one stored query.
//
// The query is kept in a local memory of R_MAX_P beats (written through
// q_we/q_addr/q_data before a run).  Dataset vectors arrive one beat per
// cycle at most (in_valid) with the beat's position in its vector (in_beat),
// the vector's index (in_idx) and a last-beat flag; an end-of-stream token
// (in_eos) follows the last vector.  The matching query beat is read from the
// local memory, then three pipelines do the work: partial_distance (one
// partial per beat, grouped by M into array A), vector_adder (B = B + A over a
// vector) and full_adder (sum of B).  The output is a queue item per vector,
// then one end-of-stream item.
//
// Timing: gaps in the input are allowed (the pipeline simply carries no
// item); there is no back-pressure.  A vector's pair leaves 4 cycles after its
// last beat enters; the end-of-stream item 4 cycles after in_eos.
// The three-pipeline split follows the original design; the query memory
// with a synchronous read port and the beat/last sideband are this design's.
// The solution bit of out_item is always 0 (see full_adder): it is set only
// inside the kNN queue.
module distance_computation
  import knn_pkg::*;
#(
  parameter int unsigned W_P     = W,
  parameter int unsigned ELEM_P  = ELEM_W,
  parameter int unsigned M_P     = M_ACC,
  parameter int unsigned R_MAX_P = R_MAX
) (
  input  logic                       clk,
  input  logic                       rst,
  // query memory write port
  input  logic                       q_we,
  input  logic [$clog2(R_MAX_P)-1:0] q_addr,
  input  logic [W_P*ELEM_P-1:0]      q_data,
  // dataset vector beats
  input  logic                       in_valid,
  input  logic                       in_eos,
  input  logic                       in_last,
  input  logic [$clog2(R_MAX_P)-1:0] in_beat,
  input  idx_t                       in_idx,
  input  logic [W_P*ELEM_P-1:0]      in_data,
  // (distance, index) pairs and end-of-stream
  output logic                       out_valid,
  output qitem_t                     out_item
);

  localparam int unsigned BW = W_P * ELEM_P;

  logic [BW-1:0] qmem [R_MAX_P];

  // stage 0: query beat read, vector beat delayed to match
  logic          s0_valid, s0_eos, s0_last;
  idx_t          s0_idx;
  logic [BW-1:0] s0_x, s0_q;

  always_ff @(posedge clk) begin
    if (q_we) qmem[q_addr] <= q_data;
    s0_q <= qmem[in_beat];
    s0_x <= in_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      s0_valid <= 1'b0;
      s0_eos   <= 1'b0;
      s0_last  <= 1'b0;
      s0_idx   <= '0;
    end else begin
      s0_valid <= in_valid;
      s0_eos   <= in_eos;
      s0_last  <= in_last;
      s0_idx   <= in_idx;
    end
  end

  logic          pd_valid, pd_eos, pd_last;
  idx_t          pd_idx;
  logic [DIST_W-1:0] pd_a [M_P];

  partial_distance #(.W_P(W_P), .ELEM_P(ELEM_P), .M_P(M_P), .ACC_P(DIST_W)) u_pd (
    .clk, .rst,
    .in_valid (s0_valid), .in_eos (s0_eos), .in_last (s0_last), .in_idx (s0_idx),
    .q_beat   (s0_q),     .x_beat (s0_x),
    .out_valid(pd_valid), .out_eos(pd_eos), .out_last(pd_last), .out_idx(pd_idx),
    .out_a    (pd_a)
  );

  logic          va_valid, va_eos;
  idx_t          va_idx;
  logic [DIST_W-1:0] va_b [M_P];

  vector_adder #(.M_P(M_P), .ACC_P(DIST_W)) u_va (
    .clk, .rst,
    .in_valid (pd_valid), .in_eos (pd_eos), .in_last(pd_last), .in_idx(pd_idx),
    .in_a     (pd_a),
    .out_valid(va_valid), .out_eos(va_eos), .out_idx(va_idx), .out_b(va_b)
  );

  full_adder #(.M_P(M_P), .ACC_P(DIST_W)) u_fa (
    .clk, .rst,
    .in_valid (va_valid), .in_eos(va_eos), .in_idx(va_idx), .in_b(va_b),
    .out_valid, .out_item
  );

endmodule
