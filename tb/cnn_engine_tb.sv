// cnn_engine_tb: one engine at its default size. Loads a 32-channel 9 x 11
// tile into the IB, streams the kernels of a 3x3 stride-2 convolution with
// 32 output channels (no bias, no relu, quantisation shift 3), assembles
// the output back into the IB, then runs a relu6 on the FPU (comparator
// with reset value 0 and an upper clamp) from bank 0 to bank 1, assembles
// that too, and compares both results, read through the IB host port, with
// a reference. Also checks the total cycle count is plausible for the
// window schedule (4 SUs share the windows of each output row).
module cnn_engine_tb;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_push, cmd_full, idle, ib_we, ib_wrdy, ib_re, ib_rrdy, k_valid, k_ready, kb_we;
  cmd_t cmd;
  logic [11:0] ib_wa, ib_ra;
  word_t ib_wd, ib_rd, k_data, kb_wd;
  logic [7:0] kb_wa;
  logic l_re, l_rb, l_we, l_wb, l_rdy;
  logic [1:0] l_rs, l_ws;
  logic [9:0] l_ra, l_wa;
  logic [OBW-1:0] l_rd [LANES], l_wd [LANES];
  cnn_engine dut (
    .clk, .rst_n, .cmd_push, .cmd, .cmd_full, .idle,
    .ext_ib_wr_en(ib_we), .ext_ib_wr_addr(ib_wa), .ext_ib_wr_data(ib_wd), .ext_ib_wr_ready(ib_wrdy),
    .ext_ib_rd_en(ib_re), .ext_ib_rd_addr(ib_ra), .ext_ib_rd_data(ib_rd), .ext_ib_rd_ready(ib_rrdy),
    .k_valid, .k_data, .k_ready, .kb_wr_en(kb_we), .kb_wr_addr(kb_wa), .kb_wr_data(kb_wd),
    .lrn_rd_en(l_re), .lrn_rd_bank(l_rb), .lrn_rd_set(l_rs), .lrn_rd_addr(l_ra), .lrn_rd_data(l_rd),
    .lrn_wr_en(l_we), .lrn_wr_bank(l_wb), .lrn_wr_set(l_ws), .lrn_wr_addr(l_wa), .lrn_wr_data(l_wd),
    .lrn_ready(l_rdy));

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  localparam int H = 9, W = 11, OH = 4, OW = 5, SH = 3;
  int xin [32][H][W];
  int wt [32][32][9];
  int yref [32][OH][OW];
  word_t kq [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && k_valid && k_ready) void'(kq.pop_front());
    k_valid <= rst_n && (kq.size() != 0);
    k_data  <= (kq.size() != 0) ? kq[0] : '0;
  end

  task automatic push(cmd_op_e op, logic sync, logic [PAYLOAD_W-1:0] p);
    @(negedge clk);
    cmd_push = 1; cmd.op = op; cmd.sync = sync; cmd.payload = p;
    @(negedge clk);
    cmd_push = 0;
  endtask

  function automatic int q(longint v, int sh);
    longint r;
    r = (v + (longint'(1) <<< (sh - 1))) >>> sh;
    return (r > 32767) ? 32767 : (r < -32768) ? -32768 : int'(r);
  endfunction

  initial begin
    conv_cmd_t cc;
    fpu_cmd_t fc;
    asm_cmd_t ac;
    word_t wd;
    int t0, t1;
    cmd_push = 0; cmd = '0; ib_we = 0; ib_wa = 0; ib_wd = 0; ib_re = 0; ib_ra = 0; kb_we = 0; kb_wa = 0; kb_wd = 0;
    l_re = 0; l_rb = 0; l_rs = 0; l_ra = 0; l_we = 0; l_wb = 0; l_ws = 0; l_wa = 0;
    for (int l = 0; l < LANES; l++) l_wd[l] = 0;
    foreach (xin[c, y, x]) xin[c][y][x] = int'($urandom_range(0, 200)) - 100;
    foreach (wt[o, c, e]) wt[o][c][e] = int'($urandom_range(0, 200)) - 100;
    foreach (yref[o, y, x]) begin
      longint s;
      s = 0;
      for (int c = 0; c < 32; c++) for (int e = 0; e < 9; e++) s += xin[c][2*y + e/3][2*x + e%3] * wt[o][c][e];
      yref[o][y][x] = q(s, SH);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      @(negedge clk);
      ib_we = 1; ib_wa = 12'(y*W + x);
      for (int r = 0; r < 32; r++) ib_wd[r*16 +: 16] = 16'(xin[r][y][x]);
    end
    @(negedge clk); ib_we = 0;
    for (int j = 0; j < 16; j++) for (int b = 0; b < 2; b++) for (int a = 0; a < 9; a++) begin
      for (int r = 0; r < 32; r++) wd[r*16 +: 16] = 16'(wt[j + 16*b][r][a]);
      kq.push_back(wd);
    end
    cc = '0; cc.h = H; cc.w = W; cc.slices = 1; cc.kx = 3; cc.ky = 3; cc.stride = 2; cc.pad = 0; cc.fu = 1;
    cc.ob_bank = 0; cc.ob_base = 0; cc.shift = SH;
    t0 = cyc;
    push(CMD_CONV, 1'b0, PAYLOAD_W'(cc));
    ac = '0; ac.ob_bank = 0; ac.ob_base = 0; ac.h = OH; ac.w = OW; ac.groups = 1; ac.ib_base = 1000;
    push(CMD_ASM, 1'b1, PAYLOAD_W'(ac));
    fc = '0; fc.fs.cmp_en = 1; fc.src_bank = 0; fc.dst_bank = 1; fc.h = OH; fc.w = OW; fc.groups = 1;
    fc.kx = 1; fc.ky = 1; fc.stride = 1; fc.cmp_s = 0; fc.clamp_hi = 16'sd600;
    push(CMD_FPU, 1'b1, PAYLOAD_W'(fc));
    ac.ob_bank = 1; ac.ib_base = 1100;
    push(CMD_ASM, 1'b1, PAYLOAD_W'(ac));
    repeat (4) @(negedge clk);
    while (!idle) @(negedge clk);
    t1 = cyc;
    $display("sequence took %0d cycles", t1 - t0);
    // the conv alone needs at least 4 rows x 2 windows x 9 elements per SU plus
    // the kernel load of 16 x 2 x 9 words; all four commands well under 2000
    checks++;
    if (t1 - t0 < 288 || t1 - t0 > 2000) begin failures++; $display("FAIL cycle count %0d", t1 - t0); end
    for (int y = 0; y < OH; y++) for (int x = 0; x < OW; x++) begin
      for (int k = 0; k < 2; k++) begin
        @(negedge clk); ib_re = 1; ib_ra = 12'((k ? 1100 : 1000) + y*OW + x);
        @(negedge clk); ib_re = 0;
        for (int o = 0; o < 32; o++) begin
          int e, got;
          e = yref[o][y][x];
          if (k) e = (e < 0) ? 0 : (e > 600) ? 600 : e;
          got = int'($signed(ib_rd[o*16 +: 16]));
          checks++;
          if (got != e) begin failures++; if (failures < 10) $display("FAIL k%0d o%0d y%0d x%0d: %0d exp %0d", k, o, y, x, got, e); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
