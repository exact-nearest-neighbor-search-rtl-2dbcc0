// tb_partition_streamer: a partition_streamer reads from a memory model kept
// here (one-cycle read latency, word a holds a + 1000).  For several
// (nvec, r, base) settings it checks that every word 0..nvec*r-1 is presented
// once, in order, with the right beat number, global index base + v, last
// flag and, when asked, one end-of-stream beat; that done pulses together with
// the final beat; that random stall cycles lose or repeat nothing; that with
// no stall one beat arrives per cycle; and that nvec = 0 gives only the end
// marker.
module tb_partition_streamer;
  import knn_pkg::*;
  localparam int D = 256, RM = 16, BW = 32;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic start = 0, eos_after = 0, stall = 0;
  idx_t nvec = '0, base = '0;
  logic [$clog2(RM):0] r = '0;
  logic busy, done, mem_rd_en;
  logic [$clog2(D)-1:0] mem_rd_addr;
  logic [BW-1:0] mem_rd_data;
  logic out_valid, out_eos, out_last;
  logic [$clog2(RM)-1:0] out_beat;
  idx_t out_idx;
  logic [BW-1:0] out_data;

  partition_streamer #(.DEPTH_P(D), .R_MAX_P(RM), .BW_P(BW)) dut (.*);

  always_ff @(posedge clk) if (mem_rd_en) mem_rd_data <= BW'(mem_rd_addr) + 1000;

  int checks = 0, failures = 0;

  task automatic run(int nv, int rr, int bs, bit ea, bit stalls);
    int word = 0, beats = 0, cycles = 0, dones = 0;
    bit got_eos = 0;
    @(negedge clk);
    start = 1; nvec = idx_t'(nv); r = ($clog2(RM)+1)'(rr); base = idx_t'(bs); eos_after = ea;
    @(negedge clk); start = 0;
    while (1) begin
      stall = stalls && ($urandom_range(0, 2) == 0);
      @(posedge clk); #1;
      cycles++;
      if (done) dones++;
      if (out_valid) begin
        if (out_eos) begin
          got_eos = 1;
          checks++; if (!ea || word != nv * rr) begin failures++; $display("FAIL early eos"); end
        end else begin
          checks++;
          if (int'(out_data) !== word + 1000 || int'(out_beat) !== word % rr || int'(out_idx) !== bs + word / rr
              || out_last !== (word % rr === rr - 1)) begin
            failures++; $display("FAIL word %0d: data %0d beat %0d idx %0d last %0d", word, out_data, out_beat, out_idx, out_last);
          end
          word++;
        end
      end
      if (done) break;
      if (cycles > 4 * D) break;
      @(negedge clk);
    end
    stall = 0;
    checks++;
    if (word != nv * rr || got_eos != ea || dones != 1) begin
      failures++; $display("FAIL run nv=%0d r=%0d: words %0d eos %0d dones %0d", nv, rr, word, got_eos, dones);
    end
    if (!stalls) begin
      checks++;
      if (cycles != nv * rr + (ea ? 1 : 0)) begin failures++; $display("FAIL rate: %0d cycles", cycles); end
    end
    @(posedge clk); #1;
    checks++; if (busy) begin failures++; $display("FAIL busy after done"); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    run(5, 3, 100, 1, 0);
    run(7, 1, 0, 0, 0);
    run(4, 16, 9000, 1, 1);
    run(20, 5, 33, 1, 1);
    run(0, 4, 0, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
