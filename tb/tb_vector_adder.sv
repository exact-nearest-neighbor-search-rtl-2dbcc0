// tb_vector_adder: feeds vector_adder (m=4) groups of random arrays A of
// lengths 1..5 per vector, and checks each emitted B against the element-wise
// sum over the vector worked out here, that B restarts from zero for the next
// vector, the index, the end-of-stream pass-through and the one-cycle latency.
module tb_vector_adder;
  import knn_pkg::*;
  localparam int MP = 4;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic in_valid = 0, in_eos = 0, in_last = 0;
  idx_t in_idx = '0;
  logic [DIST_W-1:0] in_a [MP];
  logic out_valid, out_eos;
  idx_t out_idx;
  logic [DIST_W-1:0] out_b [MP];

  vector_adder #(.M_P(MP), .ACC_P(DIST_W)) dut (.*);

  typedef struct { logic eos; idx_t idx; longint b [MP]; } exp_t;
  exp_t exp_q [$];
  int checks = 0, failures = 0;

  always @(posedge clk) if (!rst && out_valid) begin
    exp_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      e = exp_q.pop_front();
      if (out_eos !== e.eos || (!e.eos && out_idx !== e.idx)) begin failures++; $display("FAIL flags"); end
      if (!e.eos) for (int i = 0; i < MP; i++)
        if (longint'(out_b[i]) !== e.b[i]) begin failures++; $display("FAIL b[%0d]=%0d exp %0d", i, out_b[i], e.b[i]); end
    end
  end

  task automatic send_vec(int rp, idx_t idx);
    exp_t e;
    e.eos = 0; e.idx = idx;
    for (int i = 0; i < MP; i++) e.b[i] = 0;
    for (int k = 0; k < rp; k++) begin
      @(negedge clk);
      in_valid = 1; in_eos = 0; in_last = (k == rp-1); in_idx = idx;
      for (int i = 0; i < MP; i++) begin
        in_a[i] = DIST_W'($urandom_range(0, 1 << 30));
        e.b[i] += longint'(in_a[i]);
      end
      // a bubble between arrays must not matter
      if (k == 0 && rp > 2) begin @(negedge clk); in_valid = 0; end
    end
    exp_q.push_back(e);
    @(negedge clk) in_valid = 0;
  endtask

  initial begin
    for (int i = 0; i < MP; i++) in_a[i] = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int v = 0; v < 12; v++) send_vec(1 + v % 5, idx_t'(100 + v));
    // latency: output exactly one cycle after the closing array
    @(negedge clk); in_valid = 1; in_last = 1; in_idx = 5;
    for (int i = 0; i < MP; i++) in_a[i] = DIST_W'(i + 1);
    begin exp_t e; e.eos = 0; e.idx = 5; for (int i = 0; i < MP; i++) e.b[i] = i + 1; exp_q.push_back(e); end
    @(posedge clk); #1 in_valid = 0;
    checks++; if (!out_valid) begin failures++; $display("FAIL latency"); end
    @(negedge clk); in_valid = 1; in_eos = 1; in_last = 0;
    begin exp_t e; e.eos = 1; e.idx = 0; exp_q.push_back(e); end
    @(negedge clk); in_valid = 0; in_eos = 0;
    repeat (4) @(negedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
