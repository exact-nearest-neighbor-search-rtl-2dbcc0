// tb_knn_top_workloads: knn_top at its default size driven by knn_host_model
// with the two other vector lengths of the evaluation (the 769-element case
// is covered by tb_knn_top_full).  FQ-SD runs use 4096-element vectors, the
// YFCC100M deep features and the longest vector the query memories hold
// (128 beats); a bank then holds 64 vectors, so partitions are 3 x 60.
// FD-SQ runs use 960-element GIST descriptors (30 beats), 15 x 60 resident
// vectors and two queries in a row, followed by the short-vector run that
// makes the merger stall.  Every result slot is checked against an
// exhaustive search; the vector counts are far below the real datasets,
// which do not fit in on-chip banks.
module tb_knn_top_workloads;
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
                   .FQ_D(4096), .FQ_PARTS(3), .FQ_NVP(60),
                   .FD_D(960), .FD_NVB(60), .N_FDQ(2), .FD_D2(32), .FD_NVB2(40), .TIMEOUT(2000000)) host (.*);

  initial begin
    repeat (5000000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", host.checks, host.failures + 1);
    $finish;
  end
endmodule
