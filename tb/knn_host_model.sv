// knn_host_model: behavioural model of the host computer driving knn_top, used
// by the end-to-end testbenches.  It generates random queries and datasets of
// signed 16-bit elements, writes them through knn_top's host ports, runs the
// accelerator and compares every result slot with an exhaustive search done
// here: slot j of a query must hold the j-th smallest squared distance, the
// reported index must name a vector at exactly that distance, and no index
// may appear twice; slots beyond the number of vectors must be empty.
//
// Test plan (sizes from parameters):
//  1. FQ-SD, split queue: P_P queries, FQ_PARTS partitions of about FQ_NVP
//     vectors of FQ_D elements streamed through the double buffer.  The host
//     fills both banks before starting, so it must wait for a free bank.
//  2. FQ-SD, one queue of K_P nodes: a single query over the same kind of
//     stream, more vectors than K_P.
//  3. FD-SQ: FD_NVB vectors of FD_D elements resident in each bank (bank 2
//     left empty), N_FDQ queries streamed one after the other.
//  4. FD-SQ with FD_NVB2 vectors of FD_D2 elements per bank, fewer than K_P
//     in total (empty result slots); short vectors make the merger stall.
// FD-SQ query time is checked against the bound max(vectors per bank * r,
// total vectors) + 2k + 64 cycles.
// Mechanisms counted (each must occur): split and whole queue runs, FD-SQ
// runs, host waits on a full double buffer, bank alternation, merger stall
// cycles (stall_any from the testbench), empty result slots.
// Ends with the TB_RESULT line and $finish.
module knn_host_model
  import knn_pkg::*;
#(
  parameter int P_P      = 16,
  parameter int K_P      = 1024,
  parameter int DEPTH_P  = 8192,
  parameter int R_MAX_P  = 128,
  parameter int FQ_D     = 769,
  parameter int FQ_PARTS = 3,
  parameter int FQ_NVP   = 100,
  parameter int FD_D     = 769,
  parameter int FD_NVB   = 80,
  parameter int N_FDQ    = 1,
  parameter int FD_D2    = 32,
  parameter int FD_NVB2  = 40,
  parameter int TIMEOUT  = 2000000
) (
  input  logic                       clk,
  output logic                       rst,
  output mode_e                      cfg_mode,
  output logic                       cfg_split,
  output logic [$clog2(R_MAX_P):0]   cfg_r,
  output logic                       hw_valid,
  output hw_dest_e                   hw_dest,
  output logic [$clog2(P_P)-1:0]     hw_sel,
  output logic                       hw_bcast,
  output logic [$clog2(DEPTH_P)-1:0] hw_addr,
  output logic [BUS_W-1:0]           hw_data,
  input  logic                       hw_stream_ready,
  output logic                       commit,
  output idx_t                       commit_nvec,
  output logic                       commit_last,
  output logic                       start,
  input  logic                       busy,
  input  logic                       done,
  output logic [$clog2(K_P)-1:0]     res_rd_addr,
  input  qitem_t                     res_rd_item,
  input  logic                       stall_any
);

  typedef int vec_t [];

  int checks = 0, failures = 0;
  int n_split = 0, n_whole = 0, n_fdsq = 0, n_host_wait = 0, n_alt = 0, n_stall = 0, n_empty = 0;
  longint cyc = 0;

  always @(posedge clk) begin
    cyc++;
    if (stall_any) n_stall++;
  end

  vec_t   ds [$];     // dataset of the current run
  longint gidx [$];   // global index of each vector

  function automatic vec_t rnd_vec(int d);
    vec_t v = new[d];
    for (int e = 0; e < d; e++) v[e] = int'($signed(16'($urandom)));
    return v;
  endfunction

  function automatic logic [BUS_W-1:0] beat_of(vec_t v, int b);
    logic [BUS_W-1:0] w = '0;
    for (int e = 0; e < W; e++)
      if (b * W + e < v.size()) w[e*ELEM_W +: ELEM_W] = ELEM_W'(v[b * W + e]);
    return w;
  endfunction

  function automatic longint dist2(vec_t a, vec_t b);
    longint s = 0;
    for (int e = 0; e < a.size(); e++) s += longint'(a[e] - b[e]) * longint'(a[e] - b[e]);
    return s;
  endfunction

  task automatic hw_write(hw_dest_e d, int sel, bit bc, int addr, logic [BUS_W-1:0] data);
    @(negedge clk);
    hw_valid = 1; hw_dest = d; hw_sel = $clog2(P_P)'(sel); hw_bcast = bc;
    hw_addr = $clog2(DEPTH_P)'(addr); hw_data = data;
    @(negedge clk);
    hw_valid = 0; hw_bcast = 0;
  endtask

  task automatic load_query(vec_t q, int slot, bit bc, int r);
    for (int b = 0; b < r; b++) hw_write(HW_QUERY, slot, bc, b, beat_of(q, b));
  endtask

  task automatic wait_done();
    longint t0 = cyc;
    while (!done && cyc - t0 < TIMEOUT) @(posedge clk);
    checks++;
    if (!done) begin failures++; $display("FAIL run timed out"); end
    @(negedge clk);
  endtask

  // compare slots base..base+kk-1 with the exhaustive search for q
  task automatic check_results(vec_t q, int base, int kk, string what);
    longint d [$];
    longint byidx [longint];
    bit seen [longint];
    int bad = 0;
    for (int n = 0; n < ds.size(); n++) begin
      longint x = dist2(q, ds[n]);
      d.push_back(x);
      byidx[gidx[n]] = x;
    end
    d.sort();
    for (int j = 0; j < kk; j++) begin
      @(negedge clk); res_rd_addr = $clog2(K_P)'(base + j);
      @(negedge clk);
      checks++;
      if (j < d.size()) begin
        longint ri = longint'(res_rd_item.pair.idx);
        if (!res_rd_item.full || longint'(res_rd_item.pair.dst) !== d[j] || !byidx.exists(ri)
            || byidx[ri] !== d[j] || seen.exists(ri)) begin
          failures++; bad++;
          if (bad < 5) $display("FAIL %s slot %0d: full %0d d=%0d i=%0d exp d=%0d", what, j,
                                res_rd_item.full, res_rd_item.pair.dst, ri, d[j]);
        end
        seen[ri] = 1;
      end else begin
        n_empty++;
        if (res_rd_item.full) begin failures++; $display("FAIL %s slot %0d not empty", what, j); end
      end
    end
  endtask

  // FQ-SD: nq queries (split) or one (whole), streamed partitions
  task automatic run_fqsd(bit split, int d, int parts, int nvp);
    int r = (d + W - 1) / W;
    int nq = split ? P_P : 1;
    int kk = split ? K_P / P_P : K_P;
    longint g = 0;
    vec_t qs [$];
    ds.delete(); gidx.delete();
    for (int j = 0; j < nq; j++) begin
      qs.push_back(rnd_vec(d));
      load_query(qs[j], j, 0, r);
    end
    cfg_mode = MODE_FQSD; cfg_split = split; cfg_r = ($clog2(R_MAX_P)+1)'(r);
    // the host runs ahead: two partitions go in before the run starts
    for (int p = 0; p < parts; p++) begin
      int nv = nvp + $urandom_range(0, nvp / 4);
      if (nv * r > DEPTH_P) nv = DEPTH_P / r;
      if (p == 2) begin @(negedge clk); start = 1; @(negedge clk); start = 0; end
      while (!hw_stream_ready) begin n_host_wait++; @(negedge clk); end
      for (int n = 0; n < nv; n++) begin
        vec_t v = rnd_vec(d);
        ds.push_back(v); gidx.push_back(g + n);
        for (int b = 0; b < r; b++) hw_write(HW_STREAM, 0, 0, n * r + b, beat_of(v, b));
      end
      g += nv;
      if (p >= 1) n_alt++;
      @(negedge clk); commit = 1; commit_nvec = idx_t'(nv); commit_last = (p == parts - 1);
      @(negedge clk); commit = 0; commit_last = 0;
    end
    if (parts <= 2) begin @(negedge clk); start = 1; @(negedge clk); start = 0; end
    wait_done();
    for (int j = 0; j < nq; j++) check_results(qs[j], j * kk, kk, split ? "fqsd-split" : "fqsd-whole");
    if (split) n_split++; else n_whole++;
  endtask

  // FD-SQ: load nvb vectors per bank (bank 2 empty), then nq queries
  task automatic run_fdsq(int d, int nvb, int nq);
    int r = (d + W - 1) / W;
    longint g = 0;
    ds.delete(); gidx.delete();
    for (int i = 0; i < P_P; i++) begin
      int nv = (i == 2) ? 0 : nvb;
      if (nv * r > DEPTH_P) nv = DEPTH_P / r;
      for (int n = 0; n < nv; n++) begin
        vec_t v = rnd_vec(d);
        ds.push_back(v); gidx.push_back(g + n);
        for (int b = 0; b < r; b++) hw_write(HW_BANK, i, 0, n * r + b, beat_of(v, b));
      end
      hw_write(HW_NVEC, i, 0, 0, BUS_W'(nv));
      g += nv;
    end
    cfg_mode = MODE_FDSQ; cfg_split = 0; cfg_r = ($clog2(R_MAX_P)+1)'(r);
    for (int t = 0; t < nq; t++) begin
      vec_t q = rnd_vec(d);
      longint t0;
      load_query(q, 0, 1, r);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      t0 = cyc;
      wait_done();
      $display("FD-SQ query over %0d vectors of %0d beats: %0d cycles", ds.size(), r, cyc - t0);
      // one beat per cycle per bank, at most one pair per cycle into the
      // queue, then about 2k cycles for the results to drain
      checks++;
      if (cyc - t0 > ((nvb * r > ds.size()) ? nvb * r : ds.size()) + 2 * K_P + 64) begin
        failures++; $display("FAIL FD-SQ query took %0d cycles", cyc - t0);
      end
      check_results(q, 0, K_P, "fdsq");
      n_fdsq++;
    end
  endtask

  initial begin
    rst = 1; cfg_mode = MODE_FQSD; cfg_split = 0; cfg_r = '0;
    hw_valid = 0; hw_dest = HW_QUERY; hw_sel = '0; hw_bcast = 0; hw_addr = '0; hw_data = '0;
    commit = 0; commit_nvec = '0; commit_last = 0; start = 0; res_rd_addr = '0;
    repeat (4) @(negedge clk);
    rst = 0;
    run_fqsd(1, FQ_D, FQ_PARTS, FQ_NVP);
    run_fqsd(0, FQ_D, FQ_PARTS, (K_P + FQ_PARTS - 1) / FQ_PARTS);
    run_fdsq(FD_D, FD_NVB, N_FDQ);
    run_fdsq(FD_D2, FD_NVB2, 1);
    $display("mechanisms: split %0d whole %0d fdsq %0d host_wait %0d bank_alt %0d merge_stall %0d empty_slots %0d",
             n_split, n_whole, n_fdsq, n_host_wait, n_alt, n_stall, n_empty);
    checks++; if (n_split == 0)     begin failures++; $display("FAIL no split run"); end
    checks++; if (n_whole == 0)     begin failures++; $display("FAIL no whole-queue run"); end
    checks++; if (n_fdsq == 0)      begin failures++; $display("FAIL no FD-SQ run"); end
    checks++; if (n_host_wait == 0) begin failures++; $display("FAIL host never waited on the double buffer"); end
    checks++; if (n_alt == 0)       begin failures++; $display("FAIL banks never alternated"); end
    checks++; if (n_stall == 0)     begin failures++; $display("FAIL merger never stalled"); end
    checks++; if (n_empty == 0)     begin failures++; $display("FAIL no empty result slot"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
