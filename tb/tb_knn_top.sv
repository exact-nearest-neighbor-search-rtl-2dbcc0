// tb_knn_top: end-to-end test of knn_top at reduced size (4 distance
// computations, 16 queue nodes, 256-word banks) driven by knn_host_model:
// FQ-SD with split and whole queue, FD-SQ with several queries, all results
// checked against an exhaustive search.  A watchdog ends a hung run.
module tb_knn_top;
  import knn_pkg::*;
  localparam int P = 4, K = 16, D = 256, RM = 16;

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

  knn_top #(.P_P(P), .K_P(K), .DEPTH_P(D), .R_MAX_P(RM), .FIFO_P(16)) dut (.*);

  assign stall_any = |dut.merge_stall;

  knn_host_model #(.P_P(P), .K_P(K), .DEPTH_P(D), .R_MAX_P(RM),
                   .FQ_D(70), .FQ_PARTS(5), .FQ_NVP(20),
                   .FD_D(20), .FD_NVB(12), .N_FDQ(3), .FD_D2(40), .FD_NVB2(1), .TIMEOUT(100000)) host (.*);

  initial begin
    repeat (400000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", host.checks, host.failures + 1);
    $finish;
  end
endmodule
