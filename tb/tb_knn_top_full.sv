// tb_knn_top_full: knn_top at its default size (16 distance computations,
// 1024 queue nodes, 8192-word banks, vectors up to 4096 elements) driven by
// knn_host_model with 769-element vectors, the dimensionality of the
// MS MARCO passage embeddings.  Runs FQ-SD with 16 queries (k = 64 each) and
// with one query (k = 1024), then FD-SQ with one query over 15 x 80 resident
// vectors and one over 15 x 40 vectors of 32 elements (fewer than k, and fast
// enough to make the merger stall), and checks every result slot against an
// exhaustive search.
module tb_knn_top_full;
  import knn_pkg::*;
  localparam int P = 16, K = 1024, D = 8192, RM = R_MAX;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst, cfg_split, hw_valid, hw_bcast, hw_stream_ready, commit, commit_last, start, busy, done;
  mode_e cfg_mode;
  logic [$clog2(RM):0] cfg_r;
  hw_dest_e hw_dest;
  logic [$clog2(P)-1:0] hw_sel;
  logic [$clog2(D)-1:0] hw_addr;
  logic [BUS_W-1:0] hw_data;
  idx_t commit_nvec;
  logic [$clog2(K)-1:0] res_rd_addr;
  qitem_t res_rd_item;
  logic stall_any;

  knn_top dut (.*);

  assign stall_any = |dut.merge_stall;

  knn_host_model #(.P_P(P), .K_P(K), .DEPTH_P(D), .R_MAX_P(RM),
                   .FQ_D(769), .FQ_PARTS(3), .FQ_NVP(60),
                   .FD_D(769), .FD_NVB(80), .N_FDQ(1), .FD_D2(32), .FD_NVB2(40), .TIMEOUT(2000000)) host (.*);

  initial begin
    repeat (5000000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", host.checks, host.failures + 1);
    $finish;
  end
endmodule
