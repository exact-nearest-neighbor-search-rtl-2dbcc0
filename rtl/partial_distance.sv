// partial_distance: first of the three pipelines of the distance computation.
//
// Each cycle with in_valid it takes one beat of the query (q_beat) and the
// matching beat of a dataset vector (x_beat), W signed elements each, and
// computes the partial squared distance sum_{e<W} (q[e]-x[e])^2.  The partial
// is shifted into the array A of M shift registers.  When M partials have been
// collected, or the vector's last beat arrives (in_last), a copy of A is sent
// on (out_valid) and A is cleared, so a vector of r beats yields
// r' = ceil(r/M) arrays; slots not filled in the last array are zero.
// An end-of-stream token (in_eos) passes through in order.
//
// Timing: one beat per cycle, output registered one cycle after the beat
// that completes an array.  The index of the vector is carried with it.
// Splitting the vector into w-element parts, the array A of m shift registers
// and the copy to the vector adder follow the original design; closing an
// array early on the last beat (instead of counting r) is this design's choice.
module partial_distance
  import knn_pkg::*;
#(
  parameter int unsigned W_P    = W,
  parameter int unsigned ELEM_P = ELEM_W,
  parameter int unsigned M_P    = M_ACC,
  parameter int unsigned ACC_P  = DIST_W
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   in_valid,
  input  logic                   in_eos,
  input  logic                   in_last,
  input  idx_t                   in_idx,
  input  logic [W_P*ELEM_P-1:0]  q_beat,
  input  logic [W_P*ELEM_P-1:0]  x_beat,
  output logic                   out_valid,
  output logic                   out_eos,
  output logic                   out_last,
  output idx_t                   out_idx,
  output logic [ACC_P-1:0]       out_a [M_P]
);

  localparam int unsigned CNT_W = (M_P > 1) ? $clog2(M_P) : 1;

  logic [ACC_P-1:0] a_q   [M_P];  // shift-register array A
  logic [ACC_P-1:0] a_nxt [M_P];
  logic [ACC_P-1:0] psum;
  logic [CNT_W-1:0] cnt_q;
  logic             emit;

  // Sum of squared element differences of one beat
  always_comb begin
    psum = '0;
    for (int e = 0; e < W_P; e++) begin
      logic signed [ELEM_P:0]     d;
      logic signed [2*ELEM_P+1:0] dx;
      logic        [2*ELEM_P+1:0] sq;
      d  = $signed({q_beat[e*ELEM_P + ELEM_P-1], q_beat[e*ELEM_P +: ELEM_P]})
         - $signed({x_beat[e*ELEM_P + ELEM_P-1], x_beat[e*ELEM_P +: ELEM_P]});
      dx = (2*ELEM_P+2)'(d);
      sq = $unsigned(dx * dx);
      psum = psum + ACC_P'(sq);
    end
  end

  always_comb begin
    a_nxt[0] = psum;
    for (int i = 1; i < M_P; i++) a_nxt[i] = a_q[i-1];
    emit = in_valid && !in_eos && (in_last || (cnt_q == CNT_W'(M_P-1)));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt_q     <= '0;
      out_valid <= 1'b0;
      out_eos   <= 1'b0;
      out_last  <= 1'b0;
      out_idx   <= '0;
      for (int i = 0; i < M_P; i++) begin
        a_q[i]   <= '0;
        out_a[i] <= '0;
      end
    end else begin
      out_valid <= emit || (in_valid && in_eos);
      out_eos   <= in_valid && in_eos;
      out_last  <= emit && in_last;
      if (in_valid && !in_eos) begin
        if (emit) begin
          cnt_q   <= '0;
          out_idx <= in_idx;
          for (int i = 0; i < M_P; i++) begin
            out_a[i] <= a_nxt[i];
            a_q[i]   <= '0;
          end
        end else begin
          cnt_q <= cnt_q + 1'b1;
          for (int i = 0; i < M_P; i++) a_q[i] <= a_nxt[i];
        end
      end
    end
  end

endmodule
