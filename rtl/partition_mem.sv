// partition_mem: one memory bank of the accelerator holding a dataset
// partition as BUS_W-bit words ("beats").
//
// The host writes it word by word (wr_en/wr_addr/wr_data); a partition
// streamer reads it (rd_en/rd_addr) and gets rd_data one cycle later, as from
// an FPGA block RAM or an HBM pseudo-channel.  A write and a read in the same
// cycle to the same word return the old word.
// In the original system the banks are HBM2 memory of many megabytes; here
// they are on-chip arrays of DEPTH_P words, a size chosen for this design.
module partition_mem
  import knn_pkg::*;
#(
  parameter int unsigned DEPTH_P = 8192,
  parameter int unsigned BW_P    = BUS_W
) (
  input  logic                       clk,
  input  logic                       wr_en,
  input  logic [$clog2(DEPTH_P)-1:0] wr_addr,
  input  logic [BW_P-1:0]            wr_data,
  input  logic                       rd_en,
  input  logic [$clog2(DEPTH_P)-1:0] rd_addr,
  output logic [BW_P-1:0]            rd_data
);

  logic [BW_P-1:0] mem [DEPTH_P];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
