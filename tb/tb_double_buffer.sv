// tb_double_buffer: plays host and reader against double_buffer.  Checks that
// partition i goes to bank i mod 2, that the host sees wr_ready low when both
// banks are full and the reader sees rd_avail low when both are empty, that
// the reader gets each partition's vector count, first global index (running
// sum of earlier counts) and last flag in commit order, and that clear resets
// everything.  Host and reader act at random times.
module tb_double_buffer;
  import knn_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic clear = 0, commit = 0, commit_last = 0, rd_release = 0;
  idx_t commit_nvec = '0;
  logic wr_bank, wr_ready, rd_bank, rd_avail, rd_last;
  idx_t rd_nvec, rd_base;

  double_buffer dut (.*);

  int checks = 0, failures = 0;
  int host_full_waits = 0, reader_empty_waits = 0;
  localparam int NPART = 12;
  int nv [NPART];

  initial begin
    int base = 0;
    for (int p = 0; p < NPART; p++) nv[p] = $urandom_range(1, 50);
    repeat (3) @(negedge clk);
    rst = 0;
    fork
      // host
      for (int p = 0; p < NPART; p++) begin
        repeat ($urandom_range(0, 6) + ((p == 8) ? 30 : 0)) @(negedge clk);
        while (!wr_ready) begin host_full_waits++; @(negedge clk); end
        checks++;
        if (wr_bank !== p[0]) begin failures++; $display("FAIL partition %0d to bank %0d", p, wr_bank); end
        commit = 1; commit_nvec = idx_t'(nv[p]); commit_last = (p == NPART - 1);
        @(negedge clk); commit = 0;
      end
      // reader (starts late so that the host finds both banks full)
      for (int p = 0; p < NPART; p++) begin
        if (p == 0) repeat (20) @(negedge clk);
        while (!rd_avail) begin reader_empty_waits++; @(negedge clk); end
        checks++;
        if (rd_bank !== p[0] || int'(rd_nvec) != nv[p] || int'(rd_base) != base || rd_last !== (p == NPART - 1)) begin
          failures++; $display("FAIL read %0d: bank %0d nvec %0d base %0d last %0d", p, rd_bank, rd_nvec, rd_base, rd_last);
        end
        base += nv[p];
        repeat ($urandom_range(0, 6)) @(negedge clk);
        rd_release = 1; @(negedge clk); rd_release = 0;
      end
    join
    checks++; if (rd_avail || !wr_ready) begin failures++; $display("FAIL not empty at end"); end
    checks++; if (host_full_waits == 0 || reader_empty_waits == 0) begin failures++; $display("FAIL no waits seen"); end
    // clear after a commit
    @(negedge clk); commit = 1; commit_nvec = 9; @(negedge clk); commit = 0;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    checks++; if (rd_avail || wr_bank || rd_bank) begin failures++; $display("FAIL clear"); end
    @(negedge clk); commit = 1; commit_nvec = 3; @(negedge clk); commit = 0;
    checks++; if (!rd_avail || rd_base !== 0 || rd_nvec !== 3) begin failures++; $display("FAIL base after clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
