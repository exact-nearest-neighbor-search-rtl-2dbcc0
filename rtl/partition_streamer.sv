// partition_streamer: reads the vectors of one memory bank and streams them,
// one beat per cycle, to a distance computation.
//
// On start it latches nvec (vectors to read), r (beats per vector), base
// (global index of the first vector) and eos_after.  It then issues reads of
// words 0 .. nvec*r-1 of its bank (mem_rd_en/mem_rd_addr) and, one cycle
// later, presents each word with its position in the vector (out_beat), the
// vector's global index (out_idx = base + vector number) and a last-beat flag.
// With eos_after set it ends with one end-of-stream beat.  done pulses once
// the last beat (or end marker) has been presented; busy is high in between.
// stall holds back new reads (the read already issued still arrives), which
// lets a downstream buffer throttle the stream.
// Timing: out_* are valid one cycle after the read; no bubbles unless stalled.
// Reading one vector per step from the bank follows the original design; the
// address order and the sideband signals are this design's choices.
// out_data is the bank's read data passed through without a register: the
// bank's read port is already registered, and its word lines up with the
// sideband signals, which are delayed by one cycle here.
module partition_streamer
  import knn_pkg::*;
#(
  parameter int unsigned DEPTH_P = 8192,
  parameter int unsigned R_MAX_P = R_MAX,
  parameter int unsigned BW_P    = BUS_W
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       start,
  input  idx_t                       nvec,
  input  logic [$clog2(R_MAX_P):0]   r,
  input  idx_t                       base,
  input  logic                       eos_after,
  input  logic                       stall,
  output logic                       busy,
  output logic                       done,
  // memory read port
  output logic                       mem_rd_en,
  output logic [$clog2(DEPTH_P)-1:0] mem_rd_addr,
  input  logic [BW_P-1:0]            mem_rd_data,
  // beat stream
  output logic                       out_valid,
  output logic                       out_eos,
  output logic                       out_last,
  output logic [$clog2(R_MAX_P)-1:0] out_beat,
  output idx_t                       out_idx,
  output logic [BW_P-1:0]            out_data
);

  localparam int unsigned AW = $clog2(DEPTH_P);
  localparam int unsigned BT = $clog2(R_MAX_P);

  typedef enum logic [1:0] {S_IDLE, S_READ, S_EOS} state_e;
  state_e state_q;

  idx_t                 nvec_q, vec_q, base_q;
  logic [BT:0]          r_q;
  logic [BT-1:0]        beat_q;
  logic [AW-1:0]        addr_q;
  logic                 eos_after_q;

  // read issue this cycle
  logic issue, issue_last_beat, issue_last_vec;
  assign issue           = (state_q == S_READ) && !stall;
  assign issue_last_beat = ({1'b0, beat_q} == r_q - 1'b1);
  assign issue_last_vec  = issue_last_beat && (vec_q == nvec_q - 1'b1);

  assign mem_rd_en   = issue;
  assign mem_rd_addr = addr_q;
  assign busy        = (state_q != S_IDLE) || out_valid;

  // sideband of the read in flight
  logic          p_valid, p_eos, p_last, p_final;
  logic [BT-1:0] p_beat;
  idx_t          p_idx;

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q     <= S_IDLE;
      nvec_q      <= '0;
      vec_q       <= '0;
      base_q      <= '0;
      r_q         <= '0;
      beat_q      <= '0;
      addr_q      <= '0;
      eos_after_q <= 1'b0;
      p_valid     <= 1'b0;
      p_eos       <= 1'b0;
      p_last      <= 1'b0;
      p_final     <= 1'b0;
      p_beat      <= '0;
      p_idx       <= '0;
    end else begin
      p_valid <= 1'b0;
      p_eos   <= 1'b0;
      p_final <= 1'b0;
      case (state_q)
        S_IDLE: if (start) begin
          nvec_q      <= nvec;
          r_q         <= r;
          base_q      <= base;
          eos_after_q <= eos_after;
          vec_q       <= '0;
          beat_q      <= '0;
          addr_q      <= '0;
          if (nvec == '0 || r == '0) state_q <= eos_after ? S_EOS : S_IDLE;
          else                       state_q <= S_READ;
          p_final     <= (nvec == '0 || r == '0) && !eos_after;
        end
        S_READ: if (issue) begin
          p_valid <= 1'b1;
          p_last  <= issue_last_beat;
          p_beat  <= beat_q;
          p_idx   <= base_q + vec_q;
          p_final <= issue_last_vec && !eos_after_q;
          addr_q  <= addr_q + 1'b1;
          if (issue_last_beat) begin
            beat_q <= '0;
            vec_q  <= vec_q + 1'b1;
          end else begin
            beat_q <= beat_q + 1'b1;
          end
          if (issue_last_vec) state_q <= eos_after_q ? S_EOS : S_IDLE;
        end
        S_EOS: if (!stall) begin
          p_valid <= 1'b1;
          p_eos   <= 1'b1;
          p_last  <= 1'b0;
          p_final <= 1'b1;
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign out_valid = p_valid;
  assign out_eos   = p_eos;
  assign out_last  = p_last;
  assign out_beat  = p_beat;
  assign out_idx   = p_idx;
  assign out_data  = mem_rd_data;
  assign done      = p_final;

endmodule
