// epe: enhanced processing element of a supertile unit.
// Holds two weight caches used in ping-pong: while the cache selected by
// rd_cache feeds the multiplier, the other one can be rewritten through the
// weight-update port, so weight transfer overlaps computation. Each cache has
// two buffers (cache 0: Buf A/B, cache 1: Buf C/D) that hold the weights of
// two kernel groups; the same activation is multiplied by both, which is what
// the paper's DSP does by running at twice the logic clock. Here the two
// products of one logic cycle are computed side by side (one result per
// kernel group per logic cycle, same throughput as the double-pumped DSP).
// Each product is added to the cascade input from the EPE below and
// registered (one cycle per EPE, like the DSP48 P cascade).
// Interface: act/rd_addr/rd_cache arrive already skewed for this EPE's row;
// cout_* is valid one cycle after cin_* and act.
module epe
  import cnn_pkg::*;
#(
  parameter int DEPTH = WBUF_D
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  data_t                    act,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  input  logic                     rd_cache,
  input  logic                     wr_en,
  input  logic                     wr_cache,
  input  logic                     wr_buf,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  data_t                    wr_data,
  input  acc_t                     cin_a,
  input  acc_t                     cin_b,
  output acc_t                     cout_a,
  output acc_t                     cout_b
);
  // wbuf[cache][buffer][address]: small distributed RAMs
  data_t wbuf [2][2][DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) wbuf[wr_cache][wr_buf][wr_addr] <= wr_data;
  end

  data_t wa, wb;
  assign wa = wbuf[rd_cache][0][rd_addr];
  assign wb = wbuf[rd_cache][1][rd_addr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cout_a <= '0;
      cout_b <= '0;
    end else begin
      cout_a <= cin_a + acc_t'(act) * acc_t'(wa);
      cout_b <= cin_b + acc_t'(act) * acc_t'(wb);
    end
  end
endmodule
