// fpu: filter processing unit for 2D filter-like and pointwise operators
// (max/avg pool, relu/relu6, linear transforms, depthwise convolution).
// Function sharing part: the ucmd buffer holds micro-commands; fetch pops
// one when the unit is idle and decode latches its DataLoad (source
// bank/base/size, stride, pad, window), DataStore (destination bank/base),
// FuncSet and scalar fields. The slice-loop control walks the channel
// groups of 2n = 32 channels by itself, the kernel load control reads the
// depthwise weights of the current group and window element from the kernel
// buffer, and the address generator walks output pixel (oy, ox) and window
// element (ey, ex), reading the source pixel from OB set ix mod 4.
// Worker part: 2n fpu_alu lanes in SIMD. The result of each window is
// written back to the OB, set ox mod 4, address ob_addr(dst_base,...).
// Interface: ucmd push; OB port B (read data one cycle after the request);
// kernel-buffer write port (kernel word g*kx*ky + e holds the 32 lane
// weights of window element e of group g). One element per cycle.
module fpu
  import cnn_pkg::*;
#(
  parameter int AW     = 12,
  parameter int KDEPTH = 256,
  parameter int QDEPTH = 8
) (
  input  logic           clk,
  input  logic           rst_n,
  // micro-command input
  input  logic           ucmd_push,
  input  fpu_cmd_t       ucmd,
  output logic           ucmd_full,
  output logic           busy,
  output logic           done,
  // kernel buffer write
  input  logic           kb_wr_en,
  input  logic [$clog2(KDEPTH)-1:0] kb_wr_addr,
  input  word_t          kb_wr_data,
  // OB port B
  output logic           ob_rd_en,
  output logic           ob_rd_bank,
  output logic [1:0]     ob_rd_set,
  output logic [AW-1:0]  ob_rd_addr,
  input  logic [OBW-1:0] ob_rd_data [LANES],
  output logic           ob_wr_en,
  output logic           ob_wr_bank,
  output logic [1:0]     ob_wr_set,
  output logic [AW-1:0]  ob_wr_addr,
  output logic [OBW-1:0] ob_wr_data [LANES]
);
  localparam int KAW = $clog2(KDEPTH);
  localparam int MW  = 2 + AW;

  // ---- ucmd buffer and fetch ----
  fpu_cmd_t q_head;
  logic     q_empty, fetch;
  logic [$clog2(QDEPTH):0] q_count;
  cmd_fifo #(.T(fpu_cmd_t), .DEPTH(QDEPTH)) u_ucmd_buf (
    .clk, .rst_n, .push(ucmd_push), .din(ucmd), .full(ucmd_full),
    .pop(fetch), .head(q_head), .empty(q_empty), .count(q_count));

  // ---- decode: latched micro-command ----
  fpu_cmd_t c;
  logic [7:0] oh, ow;
  logic       run, draining;
  logic [3:0] drain_cnt;

  // ---- slice loop / address generation counters ----
  logic [4:0] g;
  logic [7:0] oy, ox;
  logic [2:0] ey, ex;

  assign fetch = !run && !draining && !q_empty;
  assign busy  = run || draining || !q_empty;

  logic signed [9:0] iy, ix;
  logic              pad_el, first_el, last_el;
  always_comb begin
    iy = 10'($signed({2'b0, oy}) * $signed({7'b0, c.stride})) - 10'($signed({8'b0, c.pad})) + 10'($signed({7'b0, ey}));
    ix = 10'($signed({2'b0, ox}) * $signed({7'b0, c.stride})) - 10'($signed({8'b0, c.pad})) + 10'($signed({7'b0, ex}));
    pad_el   = (iy < 0) || (ix < 0) || (iy >= $signed({2'b0, c.h})) || (ix >= $signed({2'b0, c.w}));
    first_el = (ey == 0) && (ex == 0);
    last_el  = (ey == c.ky - 3'd1) && (ex == c.kx - 3'd1);
  end

  assign ob_rd_en   = run && !pad_el;
  assign ob_rd_bank = c.src_bank;
  assign ob_rd_set  = ix[1:0];
  assign ob_rd_addr = AW'(ob_addr(c.src_base, c.h, c.w, g, iy[7:0], ix[7:0]));

  // ---- kernel buffer and kernel load control ----
  word_t kbuf [KDEPTH];
  word_t kw_word;
  always_ff @(posedge clk) begin
    if (kb_wr_en) kbuf[kb_wr_addr] <= kb_wr_data;
    if (run) kw_word <= kbuf[KAW'(g * 5'(c.kx) * 5'(c.ky) + 5'(ey * c.kx) + 5'(ex))];
  end

  // ---- element stage aligned with the OB read data ----
  logic          e_valid, e_pad, e_first, e_last;
  logic [MW-1:0] e_meta;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_valid <= 1'b0; e_pad <= 1'b0; e_first <= 1'b0; e_last <= 1'b0; e_meta <= '0;
    end else begin
      e_valid <= run;
      e_pad   <= pad_el;
      e_first <= first_el;
      e_last  <= last_el;
      e_meta  <= {ox[1:0], AW'(ob_addr(c.dst_base, oh, ow, g, oy, ox))};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c <= '0; run <= 1'b0; draining <= 1'b0; drain_cnt <= '0; done <= 1'b0;
      oh <= '0; ow <= '0; g <= '0; oy <= '0; ox <= '0; ey <= '0; ex <= '0;
    end else begin
      done <= 1'b0;
      if (fetch) begin
        c <= q_head;
        oh <= out_dim(q_head.h, q_head.ky, q_head.stride, q_head.pad);
        ow <= out_dim(q_head.w, q_head.kx, q_head.stride, q_head.pad);
        g <= '0; oy <= '0; ox <= '0; ey <= '0; ex <= '0;
        run <= 1'b1;
      end else if (run) begin
        if (ex != c.kx - 3'd1) ex <= ex + 3'd1;
        else begin
          ex <= '0;
          if (ey != c.ky - 3'd1) ey <= ey + 3'd1;
          else begin
            ey <= '0;
            if (ox != ow - 8'd1) ox <= ox + 8'd1;
            else begin
              ox <= '0;
              if (oy != oh - 8'd1) oy <= oy + 8'd1;
              else begin
                oy <= '0;
                if (g != c.groups - 5'd1) g <= g + 5'd1;
                else begin
                  run <= 1'b0; draining <= 1'b1; drain_cnt <= 4'd6;
                end
              end
            end
          end
        end
      end else if (draining) begin
        if (drain_cnt != 0) drain_cnt <= drain_cnt - 4'd1;
        else begin
          draining <= 1'b0; done <= 1'b1;
        end
      end
    end
  end

  // ---- worker part: 2n SIMD ALUs ----
  logic          a_valid [LANES];
  data_t         a_y     [LANES];
  logic [MW-1:0] a_meta  [LANES];
  for (genvar l = 0; l < LANES; l++) begin : g_alu
    fpu_alu #(.MW(MW)) u_alu (
      .clk, .rst_n,
      .in_valid(e_valid),
      .x       (data_t'(ob_rd_data[l][DATA_W-1:0])),
      .kw      (data_t'(kw_word[l*DATA_W +: DATA_W])),
      .in_pad  (e_pad),
      .in_first(e_first),
      .in_last (e_last),
      .in_meta (e_meta),
      .fs      (c.fs),
      .pre_s   (c.pre_s), .add_s(c.add_s), .cmp_s(c.cmp_s), .post_s(c.post_s),
      .shift   (c.shift), .clamp_hi(c.clamp_hi),
      .out_valid(a_valid[l]), .y(a_y[l]), .out_meta(a_meta[l]));
  end

  assign ob_wr_en   = a_valid[0];
  assign ob_wr_bank = c.dst_bank;
  assign ob_wr_set  = a_meta[0][AW +: 2];
  assign ob_wr_addr = a_meta[0][AW-1:0];
  always_comb begin
    for (int l = 0; l < LANES; l++) ob_wr_data[l] = OBW'(a_y[l]);
  end
endmodule
