// tb_queue_node: directed test of one queue_node.  Checks that an empty node
// stores the first pair silently; operation A (smaller distance: store new,
// send old) and operation B (equal or larger: send new); that a solution
// input swaps without comparison and marks the old pair as a solution; and
// that end-of-stream releases the stored pair as a solution followed one
// cycle later by the end marker, leaving the node empty.  Expected outputs
// are written out by hand from the rules of the node.
module tb_queue_node;
  import knn_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic in_valid = 0;
  qitem_t in_item = '0;
  logic out_valid;
  qitem_t out_item;

  queue_node dut (.*);

  int checks = 0, failures = 0;

  function automatic qitem_t mk(logic eos, logic sol, logic full, int d, int i);
    qitem_t q;
    q.eos = eos; q.sol = sol; q.full = full; q.pair.dst = dist_t'(d); q.pair.idx = idx_t'(i);
    return q;
  endfunction

  // drive one item (or nothing), then check the registered output
  task automatic step(logic v, qitem_t it, logic ev, qitem_t ex, string what);
    @(negedge clk); in_valid = v; in_item = it;
    @(negedge clk); in_valid = 0;
    checks++;
    if (out_valid !== ev || (ev && out_item !== ex)) begin
      failures++;
      $display("FAIL %s: valid=%0d item eos=%0d sol=%0d full=%0d d=%0d i=%0d", what,
               out_valid, out_item.eos, out_item.sol, out_item.full, out_item.pair.dst, out_item.pair.idx);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    step(1, mk(0,0,1, 50, 1), 0, '0,               "first pair stored silently");
    step(1, mk(0,0,1, 70, 2), 1, mk(0,0,1,70,2),   "B: larger forwarded");
    step(1, mk(0,0,1, 50, 3), 1, mk(0,0,1,50,3),   "B: equal forwarded");
    step(1, mk(0,0,1, 20, 4), 1, mk(0,0,1,50,1),   "A: smaller stored, old sent");
    step(0, '0,               0, '0,               "idle");
    step(1, mk(0,1,1, 90, 5), 1, mk(0,1,1,20,4),   "solution swap");
    step(1, mk(0,1,1, 95, 6), 1, mk(0,1,1,90,5),   "solution swap, no compare");
    // end of stream: solution now, end marker next cycle
    @(negedge clk); in_valid = 1; in_item = mk(1,0,0,0,0);
    @(negedge clk); in_valid = 0;
    checks++; if (!(out_valid && out_item === mk(0,1,1,95,6))) begin failures++; $display("FAIL eos phase 1"); end
    @(negedge clk);
    checks++; if (!(out_valid && out_item.eos)) begin failures++; $display("FAIL eos marker"); end
    @(negedge clk);
    checks++; if (out_valid) begin failures++; $display("FAIL output after eos"); end
    // node is empty again: next pair stored silently, an eos gives an empty solution
    step(1, mk(0,0,1, 30, 7), 0, '0,               "empty after eos");
    step(1, mk(1,0,0, 0, 0),  1, mk(0,1,1,30,7),   "release");
    @(negedge clk);
    step(1, mk(1,0,0, 0, 0),  1, mk(0,1,0,0,0),    "empty node releases empty slot");
    @(negedge clk);
    // large distances compare as unsigned
    step(1, mk(0,0,1, 32'h7fffffff, 8), 0, '0, "store big");
    @(negedge clk); in_valid = 1; in_item = mk(0,0,1,0,9); in_item.pair.dst = {DIST_W{1'b1}};
    @(negedge clk); in_valid = 0;
    checks++; if (!(out_valid && out_item.pair.idx === 9)) begin failures++; $display("FAIL max distance forwarded"); end
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
