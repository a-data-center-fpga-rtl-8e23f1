// su: supertile unit, an M x N array of EPEs (paper: m = 32 rows, n = 16
// columns, 512 DSPs).
// Row r receives input channel r of the current slice; the activation is
// shared by every EPE of the row. Column j sums the products of its M EPEs
// through the registered cascade, so row r's inputs are delayed by r cycles
// (systolic skew) to meet the partial sum coming up from row r-1. At the top
// of each column an accumulator adds the column sums of all positions of the
// sliding window (first/last flags) and delivers two results per column, one
// per kernel group: lane j (buffer A) and lane j+N (buffer B), matching the
// paper's C_out = j + Sn*32 for buffer A. Side information (meta: output
// address, slice flags, fusion index) travels with the data.
// Interface: one window element per cycle on in_*; result of a window on
// out_* M cycles after its last element (M cascade stages, the last one
// shared with the column-top accumulator register). Weights are written one
// column at a time (all M rows in parallel) into the idle cache.
module su
  import cnn_pkg::*;
#(
  parameter int M      = M_ROWS,
  parameter int N      = N_COLS,
  parameter int DEPTH  = WBUF_D,
  parameter int META_W = 24
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // window element stream
  input  logic                      in_valid,
  input  data_t                     in_act [M],
  input  logic [$clog2(DEPTH)-1:0]  in_waddr,
  input  logic                      in_cache,
  input  logic                      in_first,
  input  logic                      in_last,
  input  logic [META_W-1:0]         in_meta,
  // weight update (one column of M weights per cycle)
  input  logic                      wr_en,
  input  logic [$clog2(N)-1:0]      wr_col,
  input  logic                      wr_cache,
  input  logic                      wr_buf,
  input  logic [$clog2(DEPTH)-1:0]  wr_addr,
  input  data_t                     wr_data [M],
  // window results: 2N lanes
  output logic                      out_valid,
  output acc_t                      out_sum [2*N],
  output logic [META_W-1:0]         out_meta
);
  localparam int AW = $clog2(DEPTH);

  acc_t casc_a [M+1][N];
  acc_t casc_b [M+1][N];

  for (genvar j = 0; j < N; j++) begin : g_zero
    assign casc_a[0][j] = '0;
    assign casc_b[0][j] = '0;
  end

  for (genvar r = 0; r < M; r++) begin : g_row
    logic [DATA_W+AW:0] skew_in, skew_out;
    data_t               act_r;
    logic [AW-1:0]       addr_r;
    logic                cache_r;
    assign skew_in = {in_act[r], in_waddr, in_cache};
    delay_line #(.W(DATA_W+AW+1), .D(r)) u_skew (.clk, .rst_n, .d(skew_in), .q(skew_out));
    assign {act_r, addr_r, cache_r} = skew_out;
    for (genvar j = 0; j < N; j++) begin : g_col
      epe #(.DEPTH(DEPTH)) u_epe (
        .clk, .rst_n,
        .act     (act_r),
        .rd_addr (addr_r),
        .rd_cache(cache_r),
        .wr_en   (wr_en && (wr_col == j[$clog2(N)-1:0])),
        .wr_cache, .wr_buf, .wr_addr,
        .wr_data (wr_data[r]),
        .cin_a   (casc_a[r][j]),
        .cin_b   (casc_b[r][j]),
        .cout_a  (casc_a[r+1][j]),
        .cout_b  (casc_b[r+1][j])
      );
    end
  end

  // side information aligned with the top of the columns (M cycles)
  logic              top_valid, top_first, top_last;
  logic [META_W-1:0] top_meta;
  delay_line #(.W(META_W+3), .D(M)) u_meta (
    .clk, .rst_n,
    .d({in_valid, in_first, in_last, in_meta}),
    .q({top_valid, top_first, top_last, top_meta}));

  // column-top accumulators over the sliding window
  acc_t acc [2*N];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < 2*N; l++) begin
        acc[l]     <= '0;
        out_sum[l] <= '0;
      end
      out_valid <= 1'b0;
      out_meta  <= '0;
    end else begin
      out_valid <= top_valid && top_last;
      if (top_valid) begin
        for (int j = 0; j < N; j++) begin
          acc[j]       <= (top_first ? acc_t'(0) : acc[j])   + casc_a[M][j];
          acc[j+N]     <= (top_first ? acc_t'(0) : acc[j+N]) + casc_b[M][j];
          out_sum[j]   <= (top_first ? acc_t'(0) : acc[j])   + casc_a[M][j];
          out_sum[j+N] <= (top_first ? acc_t'(0) : acc[j+N]) + casc_b[M][j];
        end
        out_meta <= top_meta;
      end
    end
  end
endmodule
