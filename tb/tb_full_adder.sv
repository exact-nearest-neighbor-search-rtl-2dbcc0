// tb_full_adder: sends random arrays B (m=8) to full_adder and checks that each
// output item carries the sum of the eight elements worked out here, the
// index, full=1 and sol=0; that an end-of-stream input becomes an
// end-of-stream item; and that the result appears one cycle after the input.
module tb_full_adder;
  import knn_pkg::*;
  localparam int MP = 8;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic in_valid = 0, in_eos = 0;
  idx_t in_idx = '0;
  logic [DIST_W-1:0] in_b [MP];
  logic out_valid;
  qitem_t out_item;

  full_adder #(.M_P(MP), .ACC_P(DIST_W)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    for (int i = 0; i < MP; i++) in_b[i] = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 40; t++) begin
      longint s;
      s = 0;
      @(negedge clk);
      in_valid = 1; in_eos = (t == 39); in_idx = idx_t'($urandom);
      for (int i = 0; i < MP; i++) begin
        in_b[i] = DIST_W'({$urandom, $urandom}) >> 6;
        s += longint'(in_b[i]);
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL no output at t=%0d", t); end
      else if (t == 39) begin
        if (!out_item.eos) begin failures++; $display("FAIL eos"); end
      end else if (out_item.eos || out_item.sol || !out_item.full ||
                   out_item.pair.idx !== in_idx || longint'(out_item.pair.dst) != (s & ((64'd1 << DIST_W) - 1))) begin
        failures++; $display("FAIL sum %0d exp %0d", out_item.pair.dst, s);
      end
      @(negedge clk);
      checks++; if (out_valid) begin failures++; $display("FAIL spurious output"); end
    end
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
