// input_buffer: the IB, shared by the four SUs of an engine. One 512-bit
// word holds m = 32 channels of one pixel (16 bit each), so the IB delivers
// 512 bit per logic cycle, a quarter of what four SUs consume; the broadcast
// caches close that gap. Word layout of a tensor (this design's choice):
// address = base + slice*H*W + y*W + x. One synchronous read port (data one
// cycle after rd_en) and one write port. Depth is not given in the paper.
module input_buffer
  import cnn_pkg::*;
#(
  parameter int DEPTH = 4096
) (
  input  logic                     clk,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output word_t                    rd_data,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  word_t                    wr_data
);
  word_t mem [DEPTH];
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
