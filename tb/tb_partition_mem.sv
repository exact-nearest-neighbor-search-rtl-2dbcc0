// tb_partition_mem: writes random words to a partition_mem of 64 words,
// reads them back in random order and compares with a copy kept here; checks
// the one-cycle read latency, that the output holds while rd_en is low, and
// that a read and a write of the same word in one cycle return the old word.
module tb_partition_mem;
  import knn_pkg::*;
  localparam int D = 64;

  logic clk = 0;
  always #5 clk = ~clk;

  logic wr_en = 0, rd_en = 0;
  logic [$clog2(D)-1:0] wr_addr = '0, rd_addr = '0;
  logic [BUS_W-1:0] wr_data = '0, rd_data;

  partition_mem #(.DEPTH_P(D), .BW_P(BUS_W)) dut (.*);

  logic [BUS_W-1:0] ref_m [D];
  int checks = 0, failures = 0;

  function automatic logic [BUS_W-1:0] rnd();
    logic [BUS_W-1:0] v;
    for (int i = 0; i < BUS_W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    for (int a = 0; a < D; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = a[$clog2(D)-1:0]; ref_m[a] = rnd(); wr_data = ref_m[a];
    end
    @(negedge clk) wr_en = 0;
    for (int t = 0; t < 200; t++) begin
      int a = $urandom_range(0, D - 1);
      @(negedge clk); rd_en = 1; rd_addr = a[$clog2(D)-1:0];
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_data !== ref_m[a]) begin failures++; $display("FAIL word %0d", a); end
      @(negedge clk);
      checks++;
      if (rd_data !== ref_m[a]) begin failures++; $display("FAIL hold %0d", a); end
    end
    // read-during-write returns the old word
    @(negedge clk); rd_en = 1; rd_addr = 5; wr_en = 1; wr_addr = 5; wr_data = rnd();
    @(negedge clk); rd_en = 0; wr_en = 0;
    checks++; if (rd_data !== ref_m[5]) begin failures++; $display("FAIL read-during-write"); end
    ref_m[5] = wr_data;
    @(negedge clk); rd_en = 1; rd_addr = 5;
    @(negedge clk); rd_en = 0;
    checks++; if (rd_data !== ref_m[5]) begin failures++; $display("FAIL new word"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
