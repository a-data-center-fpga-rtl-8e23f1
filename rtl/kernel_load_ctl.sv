// kernel_load_ctl: kernel load controller shared by the four SUs of an engine
// (the paper: the SUs share one kernel load controller and the same kernel
// data). Kernel words (512 bit = 32 x 16-bit values) arrive on a valid/ready
// stream. For a conv command it first takes fu bias words when bias_en
// (lane l of word f = bias of output channel f*32+l), then, for every Cin
// slice s, N_COLS*2*fu*kx*ky words in the order column j, buffer b (A/B),
// address a; value r of a word goes to the EPE in row r. Slice s goes to
// weight cache s mod 2. Ping-pong: slice s may be loaded only after slice
// s-2 has finished computing (s < slices_done + 2), so the load of the next
// slice overlaps the computation of the current one.
// loaded counts the slices whose weights are complete.
module kernel_load_ctl
  import cnn_pkg::*;
#(
  parameter int N     = N_COLS,
  parameter int M     = M_ROWS,
  parameter int DEPTH = WBUF_D
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [4:0]               slices,
  input  logic [4:0]               fu,
  input  logic [2:0]               kx,
  input  logic [2:0]               ky,
  input  logic                     bias_en,
  input  logic [5:0]               slices_done,
  output logic [5:0]               loaded,
  output logic                     busy,
  // kernel stream
  input  logic                     k_valid,
  input  word_t                    k_data,
  output logic                     k_ready,
  // EPE weight write bus (to every SU)
  output logic                     wr_en,
  output logic [$clog2(N)-1:0]     wr_col,
  output logic                     wr_cache,
  output logic                     wr_buf,
  output logic [$clog2(DEPTH)-1:0] wr_addr,
  output data_t                    wr_data [M],
  // bias registers
  output data_t                    bias [16][LANES]
);
  typedef enum logic [1:0] {IDLE, BIAS, WGT} st_e;
  st_e st;
  logic [4:0] ns, nfu, bi;
  logic [4:0] s;
  logic [$clog2(N)-1:0] j;
  logic b;
  logic [4:0] a, alen;

  logic slot_free;
  assign slot_free = (6'(s) < slices_done + 6'd2);
  assign k_ready = (st == BIAS) || (st == WGT && slot_free);
  assign busy = (st != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; ns <= '0; nfu <= '0; bi <= '0; s <= '0; j <= '0; b <= 1'b0;
      a <= '0; alen <= '0; loaded <= '0;
      wr_en <= 1'b0; wr_col <= '0; wr_cache <= 1'b0; wr_buf <= 1'b0; wr_addr <= '0;
      for (int r = 0; r < M; r++) wr_data[r] <= '0;
      for (int f = 0; f < 16; f++) for (int l = 0; l < LANES; l++) bias[f][l] <= '0;
    end else begin
      wr_en <= 1'b0;
      if (start) begin
        ns <= slices; nfu <= fu; bi <= '0; s <= '0; j <= '0; b <= 1'b0; a <= '0;
        alen <= 5'(fu * 5'(kx) * 5'(ky));
        loaded <= '0;
        for (int f = 0; f < 16; f++) for (int l = 0; l < LANES; l++) bias[f][l] <= '0;
        st <= bias_en ? BIAS : WGT;
      end else if (k_valid && k_ready) begin
        if (st == BIAS) begin
          for (int l = 0; l < LANES; l++) bias[bi[3:0]][l] <= k_data[l*DATA_W +: DATA_W];
          if (bi == nfu - 5'd1) st <= WGT;
          bi <= bi + 5'd1;
        end else begin
          wr_en    <= 1'b1;
          wr_col   <= j;
          wr_cache <= s[0];
          wr_buf   <= b;
          wr_addr  <= a[$clog2(DEPTH)-1:0];
          for (int r = 0; r < M; r++) wr_data[r] <= k_data[r*DATA_W +: DATA_W];
          if (a != alen - 5'd1) a <= a + 5'd1;
          else begin
            a <= '0;
            b <= ~b;
            if (b) begin
              if (j != $clog2(N)'(N-1)) j <= j + 1'b1;
              else begin
                j <= '0;
                loaded <= 6'(s) + 6'd1;
                s <= s + 5'd1;
                if (s == ns - 5'd1) st <= IDLE;
              end
            end
          end
        end
      end
    end
  end
endmodule
