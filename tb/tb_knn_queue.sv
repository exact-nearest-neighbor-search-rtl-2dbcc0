// tb_knn_queue: checks a knn_queue of K=16 nodes in 4 segments against a
// reference top-k computed here: slot j must hold the j-th smallest distance
// of the stream, and a pair of the stream with that distance, each pair at
// most once (among equal distances the order is not defined).  Runs: one queue of 16 on 40 random pairs with many
// equal distances; one queue of 16 on only 5 pairs (unused slots must read
// full=0); four independent queues of 4 fed at the same time with streams of
// different lengths; then one queue of 16 again to show the queue is reusable.
// Also checks that done rises within 2K+4 cycles of the end-of-stream item.
module tb_knn_queue;
  import knn_pkg::*;
  localparam int K = 16, NS = 4, KS = K / NS;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic clear = 0, split = 0;
  logic in_valid [NS];
  qitem_t in_item [NS];
  logic [NS-1:0] done;
  logic [$clog2(K)-1:0] rd_addr = '0;
  qitem_t rd_item;

  knn_queue #(.K_P(K), .NSEG_P(NS)) dut (.*);

  int checks = 0, failures = 0;
  longint sd [NS][$];   // streams: distances
  int     si [NS][$];   // streams: indices

  // reference: k smallest, ties in arrival order
  task automatic check_seg(int s, int base, int kk);
    int ord [$];
    bit seen [int];
    for (int n = 0; n < sd[s].size(); n++) ord.push_back(n);
    // insertion sort, stable
    for (int a = 1; a < ord.size(); a++) begin
      int v = ord[a]; int b = a - 1;
      while (b >= 0 && sd[s][ord[b]] > sd[s][v]) begin ord[b+1] = ord[b]; b--; end
      ord[b+1] = v;
    end
    for (int j = 0; j < kk; j++) begin
      @(negedge clk); rd_addr = $clog2(K)'(base + j);
      @(negedge clk);
      checks++;
      if (j < ord.size()) begin
        int n = int'(rd_item.pair.idx) % 1000;
        if (!rd_item.full || longint'(rd_item.pair.dst) !== sd[s][ord[j]] || int'(rd_item.pair.idx) / 1000 !== s
            || n >= sd[s].size() || sd[s][n] !== longint'(rd_item.pair.dst) || seen[n]) begin
          failures++; $display("FAIL seg %0d slot %0d: d=%0d i=%0d exp d=%0d", s, j,
                               rd_item.pair.dst, rd_item.pair.idx, sd[s][ord[j]]);
        end
        if (n < sd[s].size()) seen[n] = 1;
      end else if (rd_item.full) begin
        failures++; $display("FAIL seg %0d slot %0d should be empty", s, j);
      end
    end
  endtask

  task automatic run(bit sp, int len [NS], int maxd);
    int pos [NS];
    int t, eos_cyc;
    split = sp;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int s = 0; s < NS; s++) begin
      sd[s].delete(); si[s].delete(); pos[s] = 0;
      for (int n = 0; n < len[s]; n++) begin
        sd[s].push_back($urandom_range(0, maxd)); si[s].push_back(1000 * s + n);
      end
    end
    // feed all streams at once, one item per cycle each, random bubbles
    t = 0;
    while (1) begin
      bit busy = 0;
      @(negedge clk);
      for (int s = 0; s < NS; s++) begin
        in_valid[s] = 0; in_item[s] = '0;
        if ((sp || s == 0) && pos[s] <= len[s] && ($urandom_range(0, 3) != 0)) begin
          in_valid[s] = 1;
          if (pos[s] == len[s]) in_item[s].eos = 1;
          else begin
            in_item[s].full = 1; in_item[s].pair.dst = dist_t'(sd[s][pos[s]]); in_item[s].pair.idx = idx_t'(si[s][pos[s]]);
          end
          pos[s]++;
        end
        if ((sp || s == 0) && pos[s] <= len[s]) busy = 1;
      end
      if (!busy) break;
    end
    @(negedge clk);
    for (int s = 0; s < NS; s++) in_valid[s] = 0;
    t = 0;
    while (!(sp ? (&done) : done[NS-1]) && t < 10 * K) begin @(negedge clk); t++; end
    checks++;
    if (t > 2 * K + 4) begin failures++; $display("FAIL done after %0d cycles", t); end
    if (sp) for (int s = 0; s < NS; s++) check_seg(s, s * KS, KS);
    else check_seg(0, 0, K);
  endtask

  initial begin
    int l [NS];
    for (int s = 0; s < NS; s++) begin in_valid[s] = 0; in_item[s] = '0; end
    repeat (3) @(negedge clk);
    rst = 0;
    l = '{40, 0, 0, 0};  run(0, l, 20);
    l = '{5, 0, 0, 0};   run(0, l, 1000);
    l = '{12, 3, 30, 7}; run(1, l, 50);
    l = '{60, 0, 0, 0};  run(0, l, 100000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
