// tb_queue_writer: feeds a queue_writer (K=8, 2 segments) the item sequences
// a queue tail produces: non-solution pairs (to be dropped), solutions from
// the largest distance down, then an end marker.  Checks, in split mode, that
// each segment's results land in its own half in reverse order of arrival
// (nearest first) and that both segments can write in the same cycle; in
// whole mode, that one stream of 8 solutions fills all 8 slots across both
// banks; the done flags; clear; and the one-cycle read latency.
module tb_queue_writer;
  import knn_pkg::*;
  localparam int K = 8, NS = 2, KS = 4;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic clear = 0, split = 1;
  logic seg_valid [NS];
  qitem_t seg_item [NS];
  logic [NS-1:0] done;
  logic [$clog2(K)-1:0] rd_addr = '0;
  qitem_t rd_item;

  queue_writer #(.K_P(K), .NSEG_P(NS)) dut (.*);

  int checks = 0, failures = 0;

  function automatic qitem_t sol(int d, int i);
    qitem_t q = '0;
    q.sol = 1; q.full = 1; q.pair.dst = dist_t'(d); q.pair.idx = idx_t'(i);
    return q;
  endfunction

  task automatic expect_slot(int a, int d, int i);
    @(negedge clk); rd_addr = $clog2(K)'(a);
    @(negedge clk);
    checks++;
    if (!rd_item.full || int'(rd_item.pair.dst) !== d || int'(rd_item.pair.idx) !== i) begin
      failures++; $display("FAIL slot %0d: d=%0d i=%0d exp d=%0d i=%0d", a, rd_item.pair.dst, rd_item.pair.idx, d, i);
    end
  endtask

  initial begin
    for (int s = 0; s < NS; s++) begin seg_valid[s] = 0; seg_item[s] = '0; end
    repeat (3) @(negedge clk);
    rst = 0;
    // split: both segments at once
    split = 1;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    @(negedge clk);
    seg_valid[0] = 1; seg_item[0] = '0; seg_item[0].full = 1; seg_item[0].pair.dst = 1;  // dropped
    seg_valid[1] = 0;
    for (int n = 0; n < 4; n++) begin
      @(negedge clk);
      seg_valid[0] = 1; seg_item[0] = sol(40 - 10 * n, 100 + n);
      seg_valid[1] = 1; seg_item[1] = sol(400 - 100 * n, 200 + n);
    end
    @(negedge clk);
    seg_item[0] = '0; seg_item[0].eos = 1;
    seg_valid[1] = 0;
    @(negedge clk);
    seg_valid[0] = 0;
    checks++; if (done !== 2'b01) begin failures++; $display("FAIL done=%b", done); end
    seg_valid[1] = 1; seg_item[1] = '0; seg_item[1].eos = 1;
    @(negedge clk); seg_valid[1] = 0;
    checks++; if (done !== 2'b11) begin failures++; $display("FAIL done=%b", done); end
    for (int n = 0; n < 4; n++) expect_slot(n, 10 * (n + 1), 103 - n);
    for (int n = 0; n < 4; n++) expect_slot(4 + n, 100 * (n + 1), 203 - n);
    // whole: 8 solutions through the last segment's tap
    split = 0;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    checks++; if (done !== 2'b00) begin failures++; $display("FAIL clear"); end
    for (int n = 0; n < 8; n++) begin
      @(negedge clk); seg_valid[1] = 1; seg_item[1] = sol(80 - 10 * n, 300 + n);
      seg_valid[0] = 1; seg_item[0] = sol(5, 5);   // ignored in whole mode
    end
    @(negedge clk); seg_item[1] = '0; seg_item[1].eos = 1; seg_valid[0] = 0;
    @(negedge clk); seg_valid[1] = 0;
    checks++; if (!done[1]) begin failures++; $display("FAIL whole done"); end
    for (int n = 0; n < 8; n++) expect_slot(n, 10 * (n + 1), 307 - n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
