// ob_set: output buffer set at the output of one SU. It has 2n = 32
// components, one per output lane (lane j and j+n come from SU column j),
// each with a word of 32 bit; a row of the array below is one word of all
// components at the same address. The set is ping-pong: two banks, so the
// SU side (port A) can fill one bank while the FPU or the assemble reader
// (port B) works on the other. Port A reads the temporary and the branch
// value and writes the fused result; port B reads and writes whole lane
// vectors. All reads are synchronous (data one cycle later).
// Depth per bank is not given in the paper (this design: 1024).
module ob_set
  import cnn_pkg::*;
#(
  parameter int DEPTH = 1024,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic           clk,
  // port A: SU / operator fusion
  input  logic           a_bank,
  input  logic           a_rd_en,
  input  logic [AW-1:0]  a_rd_addr,
  input  logic [AW-1:0]  a_rd_br_addr,
  output logic [OBW-1:0] a_rd_data [LANES],
  output logic [OBW-1:0] a_rd_br_data [LANES],
  input  logic           a_wr_en,
  input  logic [AW-1:0]  a_wr_addr,
  input  logic [OBW-1:0] a_wr_data [LANES],
  // port B: FPU / assemble reader
  input  logic           b_rd_en,
  input  logic           b_rd_bank,
  input  logic [AW-1:0]  b_rd_addr,
  output logic [OBW-1:0] b_rd_data [LANES],
  input  logic           b_wr_en,
  input  logic           b_wr_bank,
  input  logic [AW-1:0]  b_wr_addr,
  input  logic [OBW-1:0] b_wr_data [LANES]
);
  logic [OBW-1:0] mem [2][DEPTH][LANES];

  always_ff @(posedge clk) begin
    if (a_wr_en) mem[a_bank][a_wr_addr] <= a_wr_data;
    if (b_wr_en) mem[b_wr_bank][b_wr_addr] <= b_wr_data;
    if (a_rd_en) begin
      a_rd_data    <= mem[a_bank][a_rd_addr];
      a_rd_br_data <= mem[a_bank][a_rd_br_addr];
    end
    if (b_rd_en) b_rd_data <= mem[b_rd_bank][b_rd_addr];
  end
endmodule
