// accel_top: the accelerator role of the FPGA, two CNN engines (one per die
// of the KU115), 8 SUs and 4096 multipliers in all. The engines are
// independent; each has its own command, IB, kernel, FPU-kernel and LRN
// ports, indexed by engine. The PCIe/DMA, DDR4 controller, AXI connector and
// shell that feed these ports in the real system are not part of this RTL.
module accel_top
  import cnn_pkg::*;
#(
  parameter int NUM_ENGINES = 2,
  parameter int IB_DEPTH    = 4096,
  parameter int OB_DEPTH    = 1024,
  parameter int KB_DEPTH    = 256
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           cmd_push        [NUM_ENGINES],
  input  cmd_t           cmd             [NUM_ENGINES],
  output logic           cmd_full        [NUM_ENGINES],
  output logic           idle            [NUM_ENGINES],
  input  logic           ext_ib_wr_en    [NUM_ENGINES],
  input  logic [$clog2(IB_DEPTH)-1:0] ext_ib_wr_addr [NUM_ENGINES],
  input  word_t          ext_ib_wr_data  [NUM_ENGINES],
  output logic           ext_ib_wr_ready [NUM_ENGINES],
  input  logic           ext_ib_rd_en    [NUM_ENGINES],
  input  logic [$clog2(IB_DEPTH)-1:0] ext_ib_rd_addr [NUM_ENGINES],
  output word_t          ext_ib_rd_data  [NUM_ENGINES],
  output logic           ext_ib_rd_ready [NUM_ENGINES],
  input  logic           k_valid         [NUM_ENGINES],
  input  word_t          k_data          [NUM_ENGINES],
  output logic           k_ready         [NUM_ENGINES],
  input  logic           kb_wr_en        [NUM_ENGINES],
  input  logic [$clog2(KB_DEPTH)-1:0] kb_wr_addr [NUM_ENGINES],
  input  word_t          kb_wr_data      [NUM_ENGINES],
  input  logic           lrn_rd_en       [NUM_ENGINES],
  input  logic           lrn_rd_bank     [NUM_ENGINES],
  input  logic [1:0]     lrn_rd_set      [NUM_ENGINES],
  input  logic [$clog2(OB_DEPTH)-1:0] lrn_rd_addr [NUM_ENGINES],
  output logic [OBW-1:0] lrn_rd_data     [NUM_ENGINES][LANES],
  input  logic           lrn_wr_en       [NUM_ENGINES],
  input  logic           lrn_wr_bank     [NUM_ENGINES],
  input  logic [1:0]     lrn_wr_set      [NUM_ENGINES],
  input  logic [$clog2(OB_DEPTH)-1:0] lrn_wr_addr [NUM_ENGINES],
  input  logic [OBW-1:0] lrn_wr_data     [NUM_ENGINES][LANES],
  output logic           lrn_ready       [NUM_ENGINES]
);
  for (genvar e = 0; e < NUM_ENGINES; e++) begin : g_engine
    cnn_engine #(.IB_DEPTH(IB_DEPTH), .OB_DEPTH(OB_DEPTH), .KB_DEPTH(KB_DEPTH)) u_engine (
      .clk, .rst_n,
      .cmd_push(cmd_push[e]), .cmd(cmd[e]), .cmd_full(cmd_full[e]), .idle(idle[e]),
      .ext_ib_wr_en(ext_ib_wr_en[e]), .ext_ib_wr_addr(ext_ib_wr_addr[e]),
      .ext_ib_wr_data(ext_ib_wr_data[e]), .ext_ib_wr_ready(ext_ib_wr_ready[e]),
      .ext_ib_rd_en(ext_ib_rd_en[e]), .ext_ib_rd_addr(ext_ib_rd_addr[e]),
      .ext_ib_rd_data(ext_ib_rd_data[e]), .ext_ib_rd_ready(ext_ib_rd_ready[e]),
      .k_valid(k_valid[e]), .k_data(k_data[e]), .k_ready(k_ready[e]),
      .kb_wr_en(kb_wr_en[e]), .kb_wr_addr(kb_wr_addr[e]), .kb_wr_data(kb_wr_data[e]),
      .lrn_rd_en(lrn_rd_en[e]), .lrn_rd_bank(lrn_rd_bank[e]), .lrn_rd_set(lrn_rd_set[e]),
      .lrn_rd_addr(lrn_rd_addr[e]), .lrn_rd_data(lrn_rd_data[e]),
      .lrn_wr_en(lrn_wr_en[e]), .lrn_wr_bank(lrn_wr_bank[e]), .lrn_wr_set(lrn_wr_set[e]),
      .lrn_wr_addr(lrn_wr_addr[e]), .lrn_wr_data(lrn_wr_data[e]), .lrn_ready(lrn_ready[e]));
  end
endmodule
