// tb_distance_merger: four sources feed a distance_merger (FIFO 8, slack 3).
// Each source issues pairs at random, obeys stall, and reaches the merger
// through a two-cycle delay line, like the read and distance pipeline it
// stands for.  Checks that every pair comes out exactly once, that each
// source's pairs keep their order, that exactly one end-of-stream item comes
// out and only after all pairs, and that stall was raised at least once.
// Two streams are run back to back.
module tb_distance_merger;
  import knn_pkg::*;
  localparam int N = 4, F = 8, SL = 3;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic in_valid [N];
  qitem_t in_item [N];
  logic [N-1:0] stall;
  logic out_valid;
  qitem_t out_item;

  distance_merger #(.N_P(N), .FIFO_P(F), .SLACK_P(SL)) dut (.*);

  int checks = 0, failures = 0, stalls_seen = 0;
  int got [N];
  int eos_out;
  int total_out;

  // delay line
  logic   d1_v [N], d2_v [N];
  qitem_t d1_i [N], d2_i [N];
  logic   src_v [N];
  qitem_t src_i [N];
  always_ff @(posedge clk) for (int i = 0; i < N; i++) begin
    d1_v[i] <= src_v[i]; d1_i[i] <= src_i[i];
    d2_v[i] <= d1_v[i];  d2_i[i] <= d1_i[i];
  end
  always_comb for (int i = 0; i < N; i++) begin in_valid[i] = d2_v[i]; in_item[i] = d2_i[i]; end

  always @(posedge clk) if (!rst) begin
    if (|stall) stalls_seen++;
    if (out_valid) begin
      if (out_item.eos) eos_out++;
      else begin
        int s, n;
        s = int'(out_item.pair.idx) / 1000;
        n = int'(out_item.pair.idx) % 1000;
        total_out++;
        checks++;
        if (s >= N || n !== got[s] || int'(out_item.pair.dst) !== 7 * n + s || eos_out !== 0) begin
          failures++; $display("FAIL pair src %0d n %0d (expected n %0d)", s, n, got[s]);
        end
        if (s < N) got[s]++;
      end
    end
  end

  task automatic stream(int len [N], int rate);
    int sent [N];
    bit fin [N];
    for (int i = 0; i < N; i++) begin sent[i] = 0; fin[i] = 0; got[i] = 0; end
    eos_out = 0; total_out = 0;
    while (1) begin
      bit all = 1;
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        src_v[i] = 0; src_i[i] = '0;
        if (!fin[i] && !stall[i] && $urandom_range(0, 9) < rate) begin
          src_v[i] = 1;
          if (sent[i] == len[i]) begin src_i[i].eos = 1; fin[i] = 1; end
          else begin
            src_i[i].full = 1; src_i[i].pair.idx = idx_t'(1000 * i + sent[i]); src_i[i].pair.dst = dist_t'(7 * sent[i] + i);
            sent[i]++;
          end
        end
        if (!fin[i]) all = 0;
      end
      if (all) break;
    end
    @(negedge clk); for (int i = 0; i < N; i++) src_v[i] = 0;
    repeat (4 * F * N) @(negedge clk);
    for (int i = 0; i < N; i++) begin
      checks++; if (got[i] != len[i]) begin failures++; $display("FAIL src %0d: %0d of %0d", i, got[i], len[i]); end
    end
    checks++; if (eos_out != 1) begin failures++; $display("FAIL %0d eos items", eos_out); end
  endtask

  initial begin
    int l [N];
    for (int i = 0; i < N; i++) begin src_v[i] = 0; src_i[i] = '0; got[i] = 0; end
    repeat (3) @(negedge clk);
    rst = 0;
    // high rate: sum of rates exceeds one pair per cycle, so stalls must occur
    l = '{40, 55, 30, 60}; stream(l, 8);
    checks++; if (stalls_seen == 0) begin failures++; $display("FAIL stall never raised"); end
    l = '{3, 0, 10, 1};   stream(l, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
