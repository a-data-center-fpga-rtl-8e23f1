// cnn_engine: one CNN engine (one die of the FPGA).
// Datapath: the input buffer (IB) holds the input tile; for each Cin slice
// the IB dispatcher broadcasts it to four broadcast-cache (BC) sets, each BC
// streams the sliding windows of its SU (window x goes to SU x mod 4), the
// four SUs (32 x 16 EPEs each) compute 32 output channels per window, the
// operator-fusion stage adds the previous slice / bias / branch, applies
// relu and quantises, and the result goes into that SU's OB set. The
// assemble reader gathers the OB sets back into the IB for the next layer;
// the FPU reads and writes the OB for pooling, pointwise and depthwise
// operators. Control: CMD buffer -> command decoder/controller -> slice-loop
// controller + kernel load controller (conv), FPU ucmd buffer, assemble
// reader. All four paths run in lock step on the same command and share the
// same kernel data.
// External interface (the shell's DMA and memory side is not part of this
// RTL): command push; IB write/read ports for loading inputs and reading
// results (the engine has priority, *_ready tells when the port was taken;
// read data one cycle later); a 512-bit kernel stream; the FPU kernel-buffer
// write port; and OB port B access for the LRN module (used when neither the
// FPU nor the assemble reader is reading or writing).
// One clock: the paper runs the EPEs at twice this clock; here each EPE does
// both kernel-group products in one cycle.
module cnn_engine
  import cnn_pkg::*;
#(
  parameter int M        = M_ROWS,
  parameter int N        = N_COLS,
  parameter int IB_DEPTH = 4096,
  parameter int OB_DEPTH = 1024,
  parameter int BC_ROWS  = 8,
  parameter int BC_COLS  = 64,
  parameter int KB_DEPTH = 256,
  parameter int CMD_DEPTH = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  // commands
  input  logic           cmd_push,
  input  cmd_t           cmd,
  output logic           cmd_full,
  output logic           idle,
  // IB host port
  input  logic           ext_ib_wr_en,
  input  logic [$clog2(IB_DEPTH)-1:0] ext_ib_wr_addr,
  input  word_t          ext_ib_wr_data,
  output logic           ext_ib_wr_ready,
  input  logic           ext_ib_rd_en,
  input  logic [$clog2(IB_DEPTH)-1:0] ext_ib_rd_addr,
  output word_t          ext_ib_rd_data,
  output logic           ext_ib_rd_ready,
  // kernel stream
  input  logic           k_valid,
  input  word_t          k_data,
  output logic           k_ready,
  // FPU kernel buffer
  input  logic           kb_wr_en,
  input  logic [$clog2(KB_DEPTH)-1:0] kb_wr_addr,
  input  word_t          kb_wr_data,
  // OB port B for the LRN module
  input  logic           lrn_rd_en,
  input  logic           lrn_rd_bank,
  input  logic [1:0]     lrn_rd_set,
  input  logic [$clog2(OB_DEPTH)-1:0] lrn_rd_addr,
  output logic [OBW-1:0] lrn_rd_data [LANES],
  input  logic           lrn_wr_en,
  input  logic           lrn_wr_bank,
  input  logic [1:0]     lrn_wr_set,
  input  logic [$clog2(OB_DEPTH)-1:0] lrn_wr_addr,
  input  logic [OBW-1:0] lrn_wr_data [LANES],
  output logic           lrn_ready
);
  localparam int IAW = $clog2(IB_DEPTH);
  localparam int OAW = $clog2(OB_DEPTH);
  localparam int META_W = 20;

  // ---------------- command path ----------------
  cmd_t      q_head;
  logic      q_empty, q_pop;
  logic [$clog2(CMD_DEPTH):0] q_count;
  cmd_fifo #(.T(cmd_t), .DEPTH(CMD_DEPTH)) u_cmd_buf (
    .clk, .rst_n, .push(cmd_push), .din(cmd), .full(cmd_full),
    .pop(q_pop), .head(q_head), .empty(q_empty), .count(q_count));

  logic      conv_start, fpu_push, asm_start;
  conv_cmd_t conv_c;
  fpu_cmd_t  fpu_c;
  asm_cmd_t  asm_c;
  logic      slc_busy, kl_busy, fpu_busy, fpu_full, asm_busy;
  cmd_ctrl u_ctrl (
    .head_valid(!q_empty), .head(q_head), .pop(q_pop),
    .conv_busy(slc_busy || kl_busy), .fpu_busy, .fpu_full, .asm_busy,
    .conv_start, .conv_cmd(conv_c), .fpu_push, .fpu_cmd(fpu_c),
    .asm_start, .asm_cmd(asm_c), .idle);

  // current conv command, held for the datapath
  conv_cmd_t cc;
  logic [7:0] c_oh, c_ow;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cc <= '0; c_oh <= '0; c_ow <= '0;
    end else if (conv_start) begin
      cc   <= conv_c;
      c_oh <= out_dim(conv_c.h, conv_c.ky, conv_c.stride, conv_c.pad);
      c_ow <= out_dim(conv_c.w, conv_c.kx, conv_c.stride, conv_c.pad);
    end
  end

  // ---------------- slice loop and kernel load ----------------
  logic [5:0]  loaded, slices_done;
  logic        bc_start, disp_start, disp_busy, disp_done, acc_en, last_slice, cache;
  logic [15:0] disp_base;
  logic [NUM_SU-1:0] bc_busy;
  logic        slc_done;
  slice_loop_ctl #(.NBC(NUM_SU)) u_slice (
    .clk, .rst_n, .start(conv_start), .cmd(conv_c), .busy(slc_busy), .done(slc_done),
    .loaded, .slices_done, .bc_start, .bc_busy, .disp_start, .disp_base, .disp_busy,
    .acc_en, .last_slice, .cache);

  logic        w_en, w_cache, w_buf;
  logic [$clog2(N)-1:0] w_col;
  logic [3:0]  w_addr;
  data_t       w_data [M];
  data_t       bias [16][LANES];
  kernel_load_ctl #(.N(N), .M(M)) u_kload (
    .clk, .rst_n, .start(conv_start), .slices(conv_c.slices), .fu(conv_c.fu),
    .kx(conv_c.kx), .ky(conv_c.ky), .bias_en(conv_c.bias_en), .slices_done, .loaded,
    .busy(kl_busy), .k_valid, .k_data, .k_ready,
    .wr_en(w_en), .wr_col(w_col), .wr_cache(w_cache), .wr_buf(w_buf), .wr_addr(w_addr),
    .wr_data(w_data), .bias);

  // ---------------- input buffer ----------------
  logic        d_rd_en;
  logic [IAW-1:0] d_rd_addr;
  word_t       ib_rd_data;
  logic        a_ib_wr_en;
  logic [IAW-1:0] a_ib_wr_addr;
  word_t       a_ib_wr_data;
  assign ext_ib_rd_ready = !d_rd_en;
  assign ext_ib_wr_ready = !a_ib_wr_en;
  assign ext_ib_rd_data  = ib_rd_data;
  input_buffer #(.DEPTH(IB_DEPTH)) u_ib (
    .clk,
    .rd_en  (d_rd_en || ext_ib_rd_en),
    .rd_addr(d_rd_en ? d_rd_addr : ext_ib_rd_addr),
    .rd_data(ib_rd_data),
    .wr_en  (a_ib_wr_en || ext_ib_wr_en),
    .wr_addr(a_ib_wr_en ? a_ib_wr_addr : ext_ib_wr_addr),
    .wr_data(a_ib_wr_en ? a_ib_wr_data : ext_ib_wr_data));

  logic [8:0] free_row [NUM_SU];
  logic       bcw_valid;
  logic [7:0] bcw_y, bcw_x;
  word_t      bcw_data;
  ib_dispatcher #(.NBC(NUM_SU), .ROWS(BC_ROWS), .AW(IAW)) u_disp (
    .clk, .rst_n, .start(disp_start), .base(IAW'(disp_base)), .h(cc.h), .w(cc.w),
    .busy(disp_busy), .done(disp_done), .free_row,
    .ib_rd_en(d_rd_en), .ib_rd_addr(d_rd_addr), .ib_rd_data,
    .bc_wr_valid(bcw_valid), .bc_wr_y(bcw_y), .bc_wr_x(bcw_x), .bc_wr_data(bcw_data));

  // ---------------- OB port B sharing ----------------
  logic           f_rd_en, f_rd_bank, f_wr_en, f_wr_bank;
  logic [1:0]     f_rd_set, f_wr_set;
  logic [11:0]    f_rd_addr, f_wr_addr;
  logic [OBW-1:0] f_wr_data [LANES];
  logic           as_rd_en, as_rd_bank;
  logic [1:0]     as_rd_set;
  logic [11:0]    as_rd_addr;
  logic           pb_rd_en, pb_rd_bank, pb_wr_en, pb_wr_bank;
  logic [1:0]     pb_rd_set, pb_wr_set, pb_rd_set_q;
  logic [OAW-1:0] pb_rd_addr, pb_wr_addr;
  logic [OBW-1:0] pb_wr_data [LANES];
  logic [OBW-1:0] pb_rd_data [NUM_SU][LANES];
  logic [OBW-1:0] pb_rd_sel  [LANES];

  always_comb begin
    if (f_rd_en) begin
      pb_rd_en = 1'b1; pb_rd_bank = f_rd_bank; pb_rd_set = f_rd_set; pb_rd_addr = OAW'(f_rd_addr);
    end else if (as_rd_en) begin
      pb_rd_en = 1'b1; pb_rd_bank = as_rd_bank; pb_rd_set = as_rd_set; pb_rd_addr = OAW'(as_rd_addr);
    end else begin
      pb_rd_en = lrn_rd_en; pb_rd_bank = lrn_rd_bank; pb_rd_set = lrn_rd_set; pb_rd_addr = lrn_rd_addr;
    end
    if (f_wr_en) begin
      pb_wr_en = 1'b1; pb_wr_bank = f_wr_bank; pb_wr_set = f_wr_set; pb_wr_addr = OAW'(f_wr_addr);
      pb_wr_data = f_wr_data;
    end else begin
      pb_wr_en = lrn_wr_en; pb_wr_bank = lrn_wr_bank; pb_wr_set = lrn_wr_set; pb_wr_addr = lrn_wr_addr;
      pb_wr_data = lrn_wr_data;
    end
    pb_rd_sel = pb_rd_data[pb_rd_set_q];
  end
  assign lrn_ready   = !f_rd_en && !as_rd_en && !f_wr_en;
  assign lrn_rd_data = pb_rd_sel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pb_rd_set_q <= '0;
    else if (pb_rd_en) pb_rd_set_q <= pb_rd_set;
  end

  // ---------------- four processing paths ----------------
  for (genvar p = 0; p < NUM_SU; p++) begin : g_path
    logic        e_valid, e_first, e_last;
    data_t       e_act [M];
    logic [3:0]  e_waddr, e_f;
    logic [7:0]  e_oy, e_ox;
    logic        s_valid;
    acc_t        s_sum [LANES];
    logic [META_W-1:0] s_meta;
    logic [3:0]  s_f;
    logic [7:0]  s_oy, s_ox;
    logic        pp_rd_en, pp_wr_en;
    logic [11:0] pp_rd_addr, pp_br_addr, pp_wr_addr;
    logic [OBW-1:0] pp_rd_data [LANES];
    logic [OBW-1:0] pp_br_data [LANES];
    logic [OBW-1:0] pp_wr_data [LANES];

    broadcast_cache #(.SU_IDX(p), .M(M), .ROWS(BC_ROWS), .COLS(BC_COLS)) u_bc (
      .clk, .rst_n, .start(bc_start), .h(cc.h), .w(cc.w), .kx(cc.kx), .ky(cc.ky),
      .stride(cc.stride), .pad(cc.pad), .fu(cc.fu), .busy(bc_busy[p]),
      .wr_valid(bcw_valid), .wr_y(bcw_y), .wr_x(bcw_x), .wr_data(bcw_data),
      .free_row(free_row[p]),
      .out_valid(e_valid), .out_act(e_act), .out_waddr(e_waddr), .out_first(e_first),
      .out_last(e_last), .out_f(e_f), .out_oy(e_oy), .out_ox(e_ox));

    su #(.M(M), .N(N), .META_W(META_W)) u_su (
      .clk, .rst_n, .in_valid(e_valid), .in_act(e_act), .in_waddr(e_waddr), .in_cache(cache),
      .in_first(e_first), .in_last(e_last), .in_meta({e_f, e_oy, e_ox}),
      .wr_en(w_en), .wr_col(w_col), .wr_cache(w_cache), .wr_buf(w_buf), .wr_addr(w_addr),
      .wr_data(w_data),
      .out_valid(s_valid), .out_sum(s_sum), .out_meta(s_meta));

    assign {s_f, s_oy, s_ox} = s_meta;

    postproc #(.AW(12)) u_fuse (
      .clk, .rst_n, .in_valid(s_valid), .in_sum(s_sum),
      .in_addr   (ob_addr(cc.ob_base, c_oh, c_ow, 5'(s_f), s_oy, s_ox)),
      .in_br_addr(ob_addr(cc.br_base, c_oh, c_ow, 5'(s_f), s_oy, s_ox)),
      .in_f(s_f), .acc_en, .last_slice, .bias_en(cc.bias_en), .elt_en(cc.elt_en),
      .relu_en(cc.relu_en), .shift(cc.shift), .bias,
      .rd_en(pp_rd_en), .rd_addr(pp_rd_addr), .rd_br_addr(pp_br_addr),
      .rd_data(pp_rd_data), .rd_br_data(pp_br_data),
      .wr_en(pp_wr_en), .wr_addr(pp_wr_addr), .wr_data(pp_wr_data));

    ob_set #(.DEPTH(OB_DEPTH)) u_ob (
      .clk, .a_bank(cc.ob_bank),
      .a_rd_en(pp_rd_en), .a_rd_addr(OAW'(pp_rd_addr)), .a_rd_br_addr(OAW'(pp_br_addr)),
      .a_rd_data(pp_rd_data), .a_rd_br_data(pp_br_data),
      .a_wr_en(pp_wr_en), .a_wr_addr(OAW'(pp_wr_addr)), .a_wr_data(pp_wr_data),
      .b_rd_en(pb_rd_en && pb_rd_set == 2'(p)), .b_rd_bank(pb_rd_bank), .b_rd_addr(pb_rd_addr),
      .b_rd_data(pb_rd_data[p]),
      .b_wr_en(pb_wr_en && pb_wr_set == 2'(p)), .b_wr_bank(pb_wr_bank), .b_wr_addr(pb_wr_addr),
      .b_wr_data(pb_wr_data));
  end

  // ---------------- assemble reader and FPU ----------------
  logic asm_done, fpu_done;
  assemble_reader #(.AW(12), .IAW(IAW)) u_asm (
    .clk, .rst_n, .start(asm_start), .cmd(asm_c), .busy(asm_busy), .done(asm_done),
    .ob_rd_en(as_rd_en), .ob_rd_bank(as_rd_bank), .ob_rd_set(as_rd_set), .ob_rd_addr(as_rd_addr),
    .ob_rd_data(pb_rd_sel),
    .ib_wr_en(a_ib_wr_en), .ib_wr_addr(a_ib_wr_addr), .ib_wr_data(a_ib_wr_data));

  fpu #(.AW(12), .KDEPTH(KB_DEPTH)) u_fpu (
    .clk, .rst_n, .ucmd_push(fpu_push), .ucmd(fpu_c), .ucmd_full(fpu_full),
    .busy(fpu_busy), .done(fpu_done),
    .kb_wr_en, .kb_wr_addr, .kb_wr_data,
    .ob_rd_en(f_rd_en), .ob_rd_bank(f_rd_bank), .ob_rd_set(f_rd_set), .ob_rd_addr(f_rd_addr),
    .ob_rd_data(pb_rd_sel),
    .ob_wr_en(f_wr_en), .ob_wr_bank(f_wr_bank), .ob_wr_set(f_wr_set), .ob_wr_addr(f_wr_addr),
    .ob_wr_data(f_wr_data));
endmodule
