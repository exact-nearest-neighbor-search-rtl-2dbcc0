// knn_top: exact k-nearest-neighbour search engine with one hardware
// configuration and two run-time behaviours.
//
//  FQ-SD (fixed queries, streamed dataset; cfg_mode = MODE_FQSD): up to P_P
//    queries sit in the query memories of the P_P distance computations.  The
//    host streams the dataset partition by partition into two banks used as a
//    double buffer; each partition is read once and broadcast to all distance
//    computations, so every query sees every vector.  With cfg_split = 1 the
//    kNN queue works as P_P independent queues of K_P/P_P nodes, one per query;
//    with cfg_split = 0 only distance computation 0 and one queue of K_P nodes
//    are used (a single query with cutoff K_P).
//  FD-SQ (fixed dataset, streamed queries; cfg_mode = MODE_FDSQ): the dataset
//    is resident, partition i in bank i.  One query at a time is written to
//    all query memories; distance computation i scans bank i, and the
//    distance_merger feeds all pairs into one queue of K_P nodes.
//
// Host interface (plain signals standing in for the PCIe/HBM shell):
//  hw_valid/hw_dest/hw_sel/hw_bcast/hw_addr/hw_data  word writes:
//    HW_QUERY  query beat hw_addr of distance computation hw_sel (all if hw_bcast)
//    HW_BANK   word hw_addr of bank hw_sel
//    HW_STREAM word hw_addr of the double-buffer bank now open for writing;
//              only while hw_stream_ready, then commit (commit_nvec vectors,
//              commit_last on the final partition) hands the bank over
//    HW_NVEC   number of vectors held by bank hw_sel (FD-SQ), in hw_data
//  start       begins a run with cfg_mode, cfg_split and cfg_r (beats per
//              vector) latched; done pulses when the results are complete.
//  res_rd_addr/res_rd_item  result read, one cycle latency.  Split queues:
//              query j's neighbours at j*K_P/P_P.., nearest first; otherwise
//              0..K_P-1.  res_rd_item.full = 0 marks an unused slot.
// Vector indices are global: FQ-SD counts over all partitions in commit
// order; FD-SQ numbers bank 0 first, then bank 1, and so on.
//
// The two configurations on one set of kernels, the per-query/common queue,
// the double buffer and the building blocks follow the original design.  The
// host interface, the bank sizes and the control sequencing are this design's
// own; the host, PCIe link and HBM are outside it.
module knn_top
  import knn_pkg::*;
#(
  parameter int unsigned P_P     = 16,    // distance computations / queue segments
  parameter int unsigned K_P     = 1024,  // queue nodes (cutoff k of one queue)
  parameter int unsigned DEPTH_P = 8192,  // words per memory bank
  parameter int unsigned R_MAX_P = R_MAX, // max beats per vector
  parameter int unsigned FIFO_P  = 16     // merger FIFO depth per input
) (
  input  logic                       clk,
  input  logic                       rst,
  // configuration
  input  mode_e                      cfg_mode,
  input  logic                       cfg_split,
  input  logic [$clog2(R_MAX_P):0]   cfg_r,
  // host writes
  input  logic                       hw_valid,
  input  hw_dest_e                   hw_dest,
  input  logic [$clog2(P_P)-1:0]     hw_sel,
  input  logic                       hw_bcast,
  input  logic [$clog2(DEPTH_P)-1:0] hw_addr,
  input  logic [BUS_W-1:0]           hw_data,
  output logic                       hw_stream_ready,
  input  logic                       commit,
  input  idx_t                       commit_nvec,
  input  logic                       commit_last,
  // run control
  input  logic                       start,
  output logic                       busy,
  output logic                       done,
  // results
  input  logic [$clog2(K_P)-1:0]     res_rd_addr,
  output qitem_t                     res_rd_item
);

  localparam int unsigned QA = $clog2(R_MAX_P);
  localparam int unsigned RB = $clog2(R_MAX_P) + 1;

  typedef enum logic [1:0] {C_IDLE, C_FQSD, C_FDSQ, C_DRAIN} cstate_e;
  cstate_e state_q;

  mode_e         mode_q;
  logic          split_q;
  logic [RB-1:0] r_q;
  idx_t          nvec_q [P_P];
  idx_t          base   [P_P];

  // ------------------------------------------------------------------ banks
  logic                       st_start   [P_P];
  idx_t                       st_nvec    [P_P];
  idx_t                       st_base    [P_P];
  logic                       st_eos     [P_P];
  logic                       st_stall   [P_P];
  logic                       st_busy    [P_P];
  logic                       st_done    [P_P];
  logic                       m_rd_en    [P_P];
  logic [$clog2(DEPTH_P)-1:0] m_rd_addr  [P_P];
  logic [BUS_W-1:0]           m_rd_data  [P_P];
  logic                       b_valid    [P_P];
  logic                       b_eos      [P_P];
  logic                       b_last     [P_P];
  logic [QA-1:0]              b_beat     [P_P];
  idx_t                       b_idx      [P_P];
  logic [BUS_W-1:0]           b_data     [P_P];

  // double buffer (banks 0 and 1 in FQ-SD)
  logic db_clear, db_wr_bank, db_wr_ready, db_rd_bank, db_rd_avail, db_rd_last, db_release;
  idx_t db_rd_nvec, db_rd_base;

  double_buffer u_db (
    .clk, .rst, .clear(db_clear),
    .wr_bank(db_wr_bank), .wr_ready(db_wr_ready),
    .commit, .commit_nvec, .commit_last,
    .rd_bank(db_rd_bank), .rd_avail(db_rd_avail), .rd_nvec(db_rd_nvec),
    .rd_base(db_rd_base), .rd_last(db_rd_last), .rd_release(db_release)
  );
  assign hw_stream_ready = db_wr_ready;

  logic [P_P-1:0] merge_stall;

  for (genvar i = 0; i < P_P; i++) begin : g_bank
    logic we;
    assign we = hw_valid && (
                  (hw_dest == HW_BANK && hw_sel == i) ||
                  (hw_dest == HW_STREAM && i < 2 && db_wr_ready && db_wr_bank == i[0]));

    partition_mem #(.DEPTH_P(DEPTH_P), .BW_P(BUS_W)) u_mem (
      .clk,
      .wr_en(we), .wr_addr(hw_addr), .wr_data(hw_data),
      .rd_en(m_rd_en[i]), .rd_addr(m_rd_addr[i]), .rd_data(m_rd_data[i])
    );

    assign st_stall[i] = (mode_q == MODE_FDSQ) && merge_stall[i];

    partition_streamer #(.DEPTH_P(DEPTH_P), .R_MAX_P(R_MAX_P), .BW_P(BUS_W)) u_st (
      .clk, .rst,
      .start(st_start[i]), .nvec(st_nvec[i]), .r(r_q), .base(st_base[i]),
      .eos_after(st_eos[i]), .stall(st_stall[i]),
      .busy(st_busy[i]), .done(st_done[i]),
      .mem_rd_en(m_rd_en[i]), .mem_rd_addr(m_rd_addr[i]), .mem_rd_data(m_rd_data[i]),
      .out_valid(b_valid[i]), .out_eos(b_eos[i]), .out_last(b_last[i]),
      .out_beat(b_beat[i]), .out_idx(b_idx[i]), .out_data(b_data[i])
    );
  end

  // global index of the first vector of each resident bank (FD-SQ)
  always_comb begin
    base[0] = '0;
    for (int i = 1; i < P_P; i++) base[i] = base[i-1] + nvec_q[i-1];
  end

  // -------------------------------------------------- distance computations
  logic   fq_bank_q;   // bank being broadcast in FQ-SD
  logic [$clog2(P_P)-1:0] fq_sel;
  assign fq_sel = $clog2(P_P)'(fq_bank_q);
  logic   dc_valid [P_P];
  qitem_t dc_item  [P_P];

  for (genvar i = 0; i < P_P; i++) begin : g_dc
    logic          src_v, src_e, src_l;
    logic [QA-1:0] src_b;
    idx_t          src_i;
    logic [BUS_W-1:0] src_d;
    logic          qwe;

    always_comb begin
      if (mode_q == MODE_FQSD) begin
        src_v = b_valid[fq_sel];
        src_e = b_eos[fq_sel];
        src_l = b_last[fq_sel];
        src_b = b_beat[fq_sel];
        src_i = b_idx[fq_sel];
        src_d = b_data[fq_sel];
      end else begin
        src_v = b_valid[i];
        src_e = b_eos[i];
        src_l = b_last[i];
        src_b = b_beat[i];
        src_i = b_idx[i];
        src_d = b_data[i];
      end
    end

    assign qwe = hw_valid && hw_dest == HW_QUERY && (hw_bcast || hw_sel == i);

    distance_computation #(.W_P(W), .ELEM_P(ELEM_W), .M_P(M_ACC), .R_MAX_P(R_MAX_P)) u_dc (
      .clk, .rst,
      .q_we(qwe), .q_addr(hw_addr[QA-1:0]), .q_data(hw_data),
      .in_valid(src_v), .in_eos(src_e), .in_last(src_l), .in_beat(src_b),
      .in_idx(src_i), .in_data(src_d),
      .out_valid(dc_valid[i]), .out_item(dc_item[i])
    );
  end

  // ------------------------------------------------------- merger and queue
  logic   mg_in_v [P_P];
  logic   mg_v;
  qitem_t mg_item;

  for (genvar i = 0; i < P_P; i++) begin : g_mg
    assign mg_in_v[i] = dc_valid[i] && (mode_q == MODE_FDSQ);
  end

  distance_merger #(.N_P(P_P), .FIFO_P(FIFO_P), .SLACK_P(8)) u_merge (
    .clk, .rst,
    .in_valid(mg_in_v), .in_item(dc_item), .stall(merge_stall),
    .out_valid(mg_v), .out_item(mg_item)
  );

  logic           q_clear;
  logic           q_in_v [P_P];
  qitem_t         q_in_i [P_P];
  logic [P_P-1:0] q_done;

  always_comb begin
    for (int j = 0; j < P_P; j++) begin
      q_in_v[j] = (mode_q == MODE_FQSD) && dc_valid[j];
      q_in_i[j] = dc_item[j];
    end
    if (mode_q == MODE_FDSQ) begin
      q_in_v[0] = mg_v;
      q_in_i[0] = mg_item;
    end
  end

  knn_queue #(.K_P(K_P), .NSEG_P(P_P)) u_queue (
    .clk, .rst, .clear(q_clear), .split(split_q),
    .in_valid(q_in_v), .in_item(q_in_i), .done(q_done),
    .rd_addr(res_rd_addr), .rd_item(res_rd_item)
  );

  // ------------------------------------------------------------- controller
  logic launched_q;
  logic run_done;
  assign run_done = split_q ? (&q_done) : q_done[P_P-1];

  always_comb begin
    for (int i = 0; i < P_P; i++) begin
      st_start[i] = 1'b0;
      st_nvec[i]  = nvec_q[i];
      st_base[i]  = base[i];
      st_eos[i]   = 1'b1;
    end
    db_release = 1'b0;
    if (state_q == C_FQSD) begin
      // launch the streamer of the bank holding the next partition
      for (int i = 0; i < 2; i++) begin
        st_nvec[i] = db_rd_nvec;
        st_base[i] = db_rd_base;
        st_eos[i]  = db_rd_last;
        st_start[i] = !launched_q && db_rd_avail && (db_rd_bank == i[0]) && !st_busy[i];
      end
      db_release = launched_q && st_done[fq_sel];
    end else if (state_q == C_FDSQ) begin
      for (int i = 0; i < P_P; i++) st_start[i] = 1'b1;
    end
  end

  assign q_clear  = (state_q == C_IDLE) && start;
  assign db_clear = (state_q == C_DRAIN) && run_done && (mode_q == MODE_FQSD);
  assign busy     = (state_q != C_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q    <= C_IDLE;
      mode_q     <= MODE_FQSD;
      split_q    <= 1'b0;
      r_q        <= '0;
      launched_q <= 1'b0;
      fq_bank_q  <= 1'b0;
      done       <= 1'b0;
      for (int i = 0; i < P_P; i++) nvec_q[i] <= '0;
    end else begin
      done <= 1'b0;
      if (hw_valid && hw_dest == HW_NVEC) nvec_q[hw_sel] <= hw_data[IDX_W-1:0];
      case (state_q)
        C_IDLE: if (start) begin
          mode_q     <= cfg_mode;
          split_q    <= (cfg_mode == MODE_FQSD) && cfg_split;
          r_q        <= cfg_r;
          launched_q <= 1'b0;
          state_q    <= (cfg_mode == MODE_FQSD) ? C_FQSD : C_FDSQ;
        end
        C_FQSD: begin
          if (st_start[0] || st_start[1]) begin
            launched_q <= 1'b1;
            fq_bank_q  <= db_rd_bank;
          end
          if (db_release) begin
            launched_q <= 1'b0;
            if (db_rd_last) state_q <= C_DRAIN;
          end
        end
        C_FDSQ: state_q <= C_DRAIN;
        C_DRAIN: if (run_done) begin
          done    <= 1'b1;
          state_q <= C_IDLE;
        end
        default: state_q <= C_IDLE;
      endcase
    end
  end

endmodule
