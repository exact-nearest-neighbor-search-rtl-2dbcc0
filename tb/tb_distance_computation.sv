// tb_distance_computation: writes a random query into the query memory of a
// small distance_computation (W=4, m=3, up to 16 beats), streams random
// vectors of r = 7 and r = 2 beats with and without idle cycles between
// beats, and checks every output pair against the squared Euclidean distance
// worked out here, the index order and the final end-of-stream item.  The
// pair of a vector must leave exactly 4 cycles after its last beat.
module tb_distance_computation;
  import knn_pkg::*;
  localparam int WP = 4, EP = 16, MP = 3, RM = 16;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic q_we = 0;
  logic [$clog2(RM)-1:0] q_addr = '0, in_beat = '0;
  logic [WP*EP-1:0] q_data = '0, in_data = '0;
  logic in_valid = 0, in_eos = 0, in_last = 0;
  idx_t in_idx = '0;
  logic out_valid;
  qitem_t out_item;

  distance_computation #(.W_P(WP), .ELEM_P(EP), .M_P(MP), .R_MAX_P(RM)) dut (.*);

  logic [WP*EP-1:0] query [RM];
  typedef struct { logic eos; idx_t idx; longint d; } exp_t;
  exp_t exp_q [$];
  int checks = 0, failures = 0;
  int cyc = 0, last_beat_cyc = 0, lat_seen = 0;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (!rst && out_valid) begin
    exp_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      e = exp_q.pop_front();
      if (out_item.eos !== e.eos) begin failures++; $display("FAIL eos"); end
      else if (!e.eos && (out_item.pair.idx !== e.idx || longint'(out_item.pair.dst) != e.d || !out_item.full)) begin
        failures++; $display("FAIL idx %0d dist %0d exp idx %0d dist %0d", out_item.pair.idx, out_item.pair.dst, e.idx, e.d);
      end
    end
  end

  task automatic load_query(int r);
    for (int b = 0; b < RM; b++) begin
      for (int e = 0; e < WP; e++) query[b][e*EP +: EP] = (b < r) ? EP'($urandom) : '0;
      @(negedge clk); q_we = 1; q_addr = b[$clog2(RM)-1:0]; q_data = query[b];
    end
    @(negedge clk) q_we = 0;
  endtask

  task automatic send_vec(int r, idx_t idx, bit gaps);
    exp_t ex;
    ex.eos = 0; ex.idx = idx; ex.d = 0;
    for (int b = 0; b < r; b++) begin
      logic [WP*EP-1:0] x;
      for (int e = 0; e < WP; e++) begin
        longint df;
        x[e*EP +: EP] = EP'($urandom);
        df = longint'($signed(query[b][e*EP +: EP])) - longint'($signed(x[e*EP +: EP]));
        ex.d += df * df;
      end
      @(negedge clk);
      in_valid = 1; in_eos = 0; in_last = (b == r-1); in_beat = b[$clog2(RM)-1:0]; in_idx = idx; in_data = x;
      if (b == r-1) last_beat_cyc = cyc;
      if (gaps) begin @(negedge clk); in_valid = 0; end
    end
    exp_q.push_back(ex);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    load_query(7);
    for (int v = 0; v < 10; v++) send_vec(7, idx_t'(v), v % 3 == 0);
    @(negedge clk) in_valid = 0;
    // latency of one isolated vector
    repeat (10) @(negedge clk);
    send_vec(7, 77, 0);
    @(negedge clk) in_valid = 0;
    fork
      begin
        int start;
        start = last_beat_cyc;
        while (!out_valid) @(posedge clk);
        checks++;
        if (cyc - start != 4) begin failures++; $display("FAIL latency %0d", cyc - start); end
      end
    join
    repeat (6) @(negedge clk);
    load_query(2);
    for (int v = 0; v < 6; v++) send_vec(2, idx_t'(200 + v), 0);
    @(negedge clk); in_valid = 1; in_eos = 1; in_last = 0;
    begin exp_t e; e.eos = 1; e.idx = 0; e.d = 0; exp_q.push_back(e); end
    @(negedge clk); in_valid = 0; in_eos = 0;
    repeat (8) @(negedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL %0d missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
