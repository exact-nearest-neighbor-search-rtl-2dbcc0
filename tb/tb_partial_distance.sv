// tb_partial_distance: drives random query/vector beats into partial_distance
// (W=4 elements of 16 bits, m=3) for vectors of 1, 3, 5 and 7 beats, and
// compares every emitted array A with sums of squared differences computed
// here, including the zero padding of a short final array, the last flag, the
// index and the end-of-stream pass-through.  Also checks the one-cycle latency.
module tb_partial_distance;
  import knn_pkg::*;
  localparam int WP = 4, EP = 16, MP = 3;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic in_valid = 0, in_eos = 0, in_last = 0;
  idx_t in_idx = '0;
  logic [WP*EP-1:0] q_beat = '0, x_beat = '0;
  logic out_valid, out_eos, out_last;
  idx_t out_idx;
  logic [DIST_W-1:0] out_a [MP];

  partial_distance #(.W_P(WP), .ELEM_P(EP), .M_P(MP), .ACC_P(DIST_W)) dut (.*);

  typedef struct { logic eos; logic last; idx_t idx; longint a [MP]; } exp_t;
  exp_t exp_q [$];
  int checks = 0, failures = 0;

  function automatic longint psum(logic [WP*EP-1:0] q, logic [WP*EP-1:0] x);
    longint s = 0;
    for (int e = 0; e < WP; e++) begin
      longint d = longint'($signed(q[e*EP +: EP])) - longint'($signed(x[e*EP +: EP]));
      s += d * d;
    end
    return s;
  endfunction

  // monitor
  always @(posedge clk) if (!rst && out_valid) begin
    exp_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = exp_q.pop_front();
      if (out_eos !== e.eos || (!e.eos && (out_last !== e.last || out_idx !== e.idx))) begin
        failures++; $display("FAIL flags eos=%0d last=%0d idx=%0d", out_eos, out_last, out_idx);
      end
      if (!e.eos) for (int i = 0; i < MP; i++)
        if (longint'(out_a[i]) !== e.a[i]) begin
          failures++; $display("FAIL a[%0d]=%0d exp %0d", i, out_a[i], e.a[i]);
        end
    end
  end

  task automatic send_vec(int r, idx_t idx);
    longint parts [$];
    for (int b = 0; b < r; b++) begin
      logic [WP*EP-1:0] q, x;
      for (int e = 0; e < WP; e++) begin
        q[e*EP +: EP] = EP'($urandom);
        x[e*EP +: EP] = EP'($urandom);
      end
      parts.push_back(psum(q, x));
      @(negedge clk);
      in_valid = 1; in_eos = 0; in_last = (b == r-1); in_idx = idx; q_beat = q; x_beat = x;
      if (parts.size() == MP || b == r-1) begin
        exp_t e;
        e.eos = 0; e.last = (b == r-1); e.idx = idx;
        // newest partial sits in a[0]
        for (int i = 0; i < MP; i++) e.a[i] = (i < parts.size()) ? parts[parts.size()-1-i] : 0;
        exp_q.push_back(e);
        parts.delete();
      end
    end
    @(negedge clk) in_valid = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    send_vec(1, 10); send_vec(3, 11); send_vec(5, 12); send_vec(7, 13);
    // latency check: array of a 1-beat vector appears exactly one cycle later
    @(negedge clk); in_valid = 1; in_last = 1; in_idx = 99; q_beat = '0; x_beat = '0;
    x_beat[EP-1:0] = 16'sd3;
    begin exp_t e; e.eos = 0; e.last = 1; e.idx = 99; e.a[0] = 9; e.a[1] = 0; e.a[2] = 0; exp_q.push_back(e); end
    @(posedge clk); #1 in_valid = 0;
    checks++; if (!out_valid) begin failures++; $display("FAIL latency"); end
    // extreme values: (-32768 - 32767)^2 * W
    @(negedge clk); in_valid = 1; in_last = 1; in_idx = 7;
    for (int e = 0; e < WP; e++) begin q_beat[e*EP +: EP] = 16'h8000; x_beat[e*EP +: EP] = 16'h7fff; end
    begin exp_t e; e.eos = 0; e.last = 1; e.idx = 7; e.a[0] = 4 * 65535 * 65535; e.a[1] = 0; e.a[2] = 0; exp_q.push_back(e); end
    @(negedge clk); in_valid = 1; in_eos = 1; in_last = 0;
    begin exp_t e; e.eos = 1; e.last = 0; e.idx = 0; exp_q.push_back(e); end
    @(negedge clk); in_valid = 0; in_eos = 0;
    repeat (5) @(negedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", exp_q.size()); end
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
