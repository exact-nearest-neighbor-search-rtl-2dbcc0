// vector_adder: second pipeline of the distance computation.
//
// Holds an array B of M accumulators, initially zero.  For every array A it
// receives (in_valid) it performs B = B + A element by element.  On the array
// that closes a vector (in_last), i.e. after r' = ceil(r/M) activations, the
// sum is sent on (out_valid, out_b) and B is set back to zero.  An
// end-of-stream token passes through in order.
//
// Timing: accepts one array per cycle; the output is registered one cycle
// after the closing array.  The B = B + A accumulation, the copy and the
// clear follow the original design; recognising the closing array by the
// last flag carried with it is this design's choice.
module vector_adder
  import knn_pkg::*;
#(
  parameter int unsigned M_P   = M_ACC,
  parameter int unsigned ACC_P = DIST_W
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  input  logic             in_eos,
  input  logic             in_last,
  input  idx_t             in_idx,
  input  logic [ACC_P-1:0] in_a [M_P],
  output logic             out_valid,
  output logic             out_eos,
  output idx_t             out_idx,
  output logic [ACC_P-1:0] out_b [M_P]
);

  logic [ACC_P-1:0] b_q [M_P];

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_eos   <= 1'b0;
      out_idx   <= '0;
      for (int i = 0; i < M_P; i++) begin
        b_q[i]   <= '0;
        out_b[i] <= '0;
      end
    end else begin
      out_valid <= in_valid && (in_eos || in_last);
      out_eos   <= in_valid && in_eos;
      if (in_valid && !in_eos) begin
        if (in_last) begin
          out_idx <= in_idx;
          for (int i = 0; i < M_P; i++) begin
            out_b[i] <= b_q[i] + in_a[i];
            b_q[i]   <= '0;
          end
        end else begin
          for (int i = 0; i < M_P; i++) b_q[i] <= b_q[i] + in_a[i];
        end
      end
    end
  end

endmodule
