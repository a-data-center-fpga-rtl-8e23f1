// broadcast_cache: broadcast cache (BC) set in front of one SU.
// All BC sets receive the same input-tile slice broadcast from the IB (one
// 512-bit word = m channels of one pixel per cycle) and keep it in a circular
// buffer of ROWS rows: input row y lives in slot y mod ROWS and overwrites the
// row ROWS above it once no window needs it any more. The read side walks the
// sliding windows that belong to this SU: output columns SU_IDX, SU_IDX+4,
// ... so the window steps 4*stride input columns along a row and the four SUs
// start at different positions (interleaved task dispatch). For each window
// it emits, for every fused kernel f (0..fu-1), the kx*ky window elements,
// one per cycle, with the weight address f*kx*ky + e and first/last flags.
// Elements outside the tile (zero padding) are sent as 0.
// Flow control: a window is read only when every row it needs has been
// loaded; free_row tells the writer which input row is the oldest still in
// use, so the writer may send row y while y < free_row + ROWS. ROWS = 8 holds
// a kernel of up to 7 rows plus the spare row the paper asks for.
// Timing: out_* is registered, one cycle after the element is chosen.
module broadcast_cache
  import cnn_pkg::*;
#(
  parameter int SU_IDX = 0,
  parameter int M      = M_ROWS,
  parameter int ROWS   = 8,
  parameter int COLS   = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  // command
  input  logic               start,
  input  logic [7:0]         h,
  input  logic [7:0]         w,
  input  logic [2:0]         kx,
  input  logic [2:0]         ky,
  input  logic [2:0]         stride,
  input  logic [1:0]         pad,
  input  logic [4:0]         fu,
  output logic               busy,
  // write side (broadcast from the IB)
  input  logic               wr_valid,
  input  logic [7:0]         wr_y,
  input  logic [7:0]         wr_x,
  input  logic [M*DATA_W-1:0] wr_data,
  output logic [8:0]         free_row,
  // window element stream to the SU
  output logic               out_valid,
  output data_t              out_act [M],
  output logic [3:0]         out_waddr,
  output logic               out_first,
  output logic               out_last,
  output logic [3:0]         out_f,
  output logic [7:0]         out_oy,
  output logic [7:0]         out_ox
);
  localparam int RW = $clog2(ROWS);
  localparam int CW = $clog2(COLS);

  logic [M*DATA_W-1:0] mem [ROWS][COLS];
  logic [8:0] rows_loaded;

  logic [7:0] oh, ow;
  logic [7:0] oy, ox;
  logic [3:0] f, ey, ex;
  logic       run;

  always_ff @(posedge clk) begin
    if (wr_valid) mem[wr_y[RW-1:0]][wr_x[CW-1:0]] <= wr_data;
  end

  // window geometry
  logic signed [9:0] iy0, ix0, iy, ix, ymax;
  logic              need_ok, pad_el;
  logic [RW-1:0]     rd_slot;
  logic [CW-1:0]     rd_col;
  always_comb begin
    iy0     = 10'($signed({2'b0, oy}) * $signed({7'b0, stride})) - 10'($signed({8'b0, pad}));
    ix0     = 10'($signed({2'b0, ox}) * $signed({7'b0, stride})) - 10'($signed({8'b0, pad}));
    iy      = iy0 + 10'($signed({6'b0, ey}));
    ix      = ix0 + 10'($signed({6'b0, ex}));
    ymax    = iy0 + 10'($signed({7'b0, ky})) - 10'sd1;
    if (ymax > $signed({2'b0, h}) - 10'sd1) ymax = $signed({2'b0, h}) - 10'sd1;
    need_ok = $signed({1'b0, rows_loaded}) > ymax;
    pad_el  = (iy < 0) || (ix < 0) || (iy >= $signed({2'b0, h})) || (ix >= $signed({2'b0, w}));
    rd_slot = iy[RW-1:0];
    rd_col  = ix[CW-1:0];
  end

  logic issue;
  assign issue = run && need_ok;
  assign busy  = run || start;

  // oldest input row still needed by this BC
  always_comb begin
    if (!run) free_row = 9'd256;
    else if (iy0 < 0) free_row = 9'd0;
    else free_row = iy0[8:0];
  end

  logic last_e, last_f, last_x, last_y;
  assign last_e = (ex == 4'(kx - 3'd1)) && (ey == 4'(ky - 3'd1));
  assign last_f = (f == 4'(fu - 5'd1));
  assign last_x = (9'(ox) + 9'd4 >= 9'(ow));
  assign last_y = (oy == oh - 8'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0;
      rows_loaded <= '0;
      oh <= '0; ow <= '0; oy <= '0; ox <= '0;
      f <= '0; ey <= '0; ex <= '0;
      out_valid <= 1'b0;
      out_waddr <= '0; out_first <= 1'b0; out_last <= 1'b0; out_f <= '0;
      out_oy <= '0; out_ox <= '0;
      for (int r = 0; r < M; r++) out_act[r] <= '0;
    end else begin
      if (start) begin
        oh <= out_dim(h, ky, stride, pad);
        ow <= out_dim(w, kx, stride, pad);
        oy <= '0; ox <= 8'(SU_IDX);
        f <= '0; ey <= '0; ex <= '0;
        rows_loaded <= '0;
        run <= (out_dim(w, kx, stride, pad) > 8'(SU_IDX));
      end else begin
        if (wr_valid && (wr_x == w - 8'd1)) rows_loaded <= 9'(wr_y) + 9'd1;
        if (issue) begin
          if (ex != 4'(kx - 3'd1)) ex <= ex + 4'd1;
          else begin
            ex <= '0;
            if (ey != 4'(ky - 3'd1)) ey <= ey + 4'd1;
            else begin
              ey <= '0;
              if (!last_f) f <= f + 4'd1;
              else begin
                f <= '0;
                if (!last_x) ox <= ox + 8'd4;
                else begin
                  ox <= 8'(SU_IDX);
                  if (!last_y) oy <= oy + 8'd1;
                  else run <= 1'b0;
                end
              end
            end
          end
        end
      end
      out_valid <= issue;
      if (issue) begin
        for (int r = 0; r < M; r++)
          out_act[r] <= pad_el ? data_t'(0) : data_t'(mem[rd_slot][rd_col][r*DATA_W +: DATA_W]);
        out_waddr <= 4'(f * 4'(kx) * 4'(ky)) + 4'(ey * 4'(kx)) + ex;
        out_first <= (ex == 0) && (ey == 0);
        out_last  <= last_e;
        out_f     <= f;
        out_oy    <= oy;
        out_ox    <= ox;
      end
    end
  end
endmodule
