// fpu_tb: the filter processing unit against a model of the four OB sets.
// Two micro-commands are queued back to back in the ucmd buffer: a 3x3,
// stride 2, pad 1 max-pool over a 7 x 9 tensor of 64 channels (two channel
// groups, so the slice loop runs twice) from bank 0 into bank 1, and a 3x3
// pad 1 depthwise convolution of the same tensor with weights from the
// kernel buffer, into bank 1 at another base. Every output pixel and channel
// is compared with a reference; the unit must report done twice.
module fpu_tb;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ucmd_push, ucmd_full, busy, done, kb_wr_en, ob_rd_en, ob_rd_bank, ob_wr_en, ob_wr_bank;
  fpu_cmd_t ucmd;
  logic [7:0] kb_wr_addr;
  word_t kb_wr_data;
  logic [1:0] ob_rd_set, ob_wr_set;
  logic [11:0] ob_rd_addr, ob_wr_addr;
  logic [OBW-1:0] ob_rd_data [LANES], ob_wr_data [LANES];
  logic [OBW-1:0] ob [2][4][1024][LANES];
  fpu dut (.*);
  int checks = 0, failures = 0, dones = 0;
  localparam int H = 7, W = 9, C = 64;
  int xin [C][H][W];
  int kwt [C][9];

  always @(posedge clk) begin
    if (ob_rd_en) ob_rd_data <= ob[ob_rd_bank][ob_rd_set][ob_rd_addr[9:0]];
    if (ob_wr_en) ob[ob_wr_bank][ob_wr_set][ob_wr_addr[9:0]] <= ob_wr_data;
    if (rst_n && done) dones++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int oh, ow;
    ucmd_push = 0; ucmd = '0; kb_wr_en = 0; kb_wr_addr = 0; kb_wr_data = 0;
    foreach (ob[b, s, a, l]) ob[b][s][a][l] = $urandom;
    foreach (xin[c, y, x]) begin
      xin[c][y][x] = int'($urandom_range(0, 4000)) - 2000;
      ob[0][x % 4][ob_addr(12'd0, 8'(H), 8'(W), 5'(c / 32), 8'(y), 8'(x))][c % 32] = 32'(xin[c][y][x]);
    end
    foreach (kwt[c, e]) kwt[c][e] = int'($urandom_range(0, 40)) - 20;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 2; g++) for (int e = 0; e < 9; e++) begin
      @(negedge clk);
      kb_wr_en = 1; kb_wr_addr = 8'(g*9 + e);
      for (int l = 0; l < 32; l++) kb_wr_data[l*16 +: 16] = 16'(kwt[g*32+l][e]);
    end
    @(negedge clk); kb_wr_en = 0;
    ucmd = '0; ucmd.fs.cmp_en = 1; ucmd.src_bank = 0; ucmd.src_base = 0; ucmd.dst_bank = 1; ucmd.dst_base = 0;
    ucmd.h = H; ucmd.w = W; ucmd.groups = 2; ucmd.kx = 3; ucmd.ky = 3; ucmd.stride = 2; ucmd.pad = 1;
    ucmd.cmp_s = -16'sd32768; ucmd.clamp_hi = 16'sd32767;
    ucmd_push = 1;
    @(negedge clk);
    ucmd = '0; ucmd.fs.pre_en = 1; ucmd.fs.pre_kw = 1; ucmd.fs.add_en = 1; ucmd.src_bank = 0; ucmd.src_base = 0;
    ucmd.dst_bank = 1; ucmd.dst_base = 300; ucmd.h = H; ucmd.w = W; ucmd.groups = 2; ucmd.kx = 3; ucmd.ky = 3;
    ucmd.stride = 1; ucmd.pad = 1; ucmd.shift = 5; ucmd.clamp_hi = 16'sd32767;
    @(negedge clk);
    ucmd_push = 0;
    repeat (3) @(negedge clk);
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    // max-pool check
    oh = (H + 2 - 3) / 2 + 1; ow = (W + 2 - 3) / 2 + 1;
    for (int c = 0; c < C; c++) for (int y = 0; y < oh; y++) for (int x = 0; x < ow; x++) begin
      int m, got;
      m = -32768;
      for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) begin
        int iy, ix;
        iy = 2*y - 1 + a; ix = 2*x - 1 + b;
        if (iy >= 0 && iy < H && ix >= 0 && ix < W && xin[c][iy][ix] > m) m = xin[c][iy][ix];
      end
      got = int'($signed(ob[1][x % 4][ob_addr(12'd0, 8'(oh), 8'(ow), 5'(c / 32), 8'(y), 8'(x))][c % 32]));
      checks++;
      if (got != m) begin failures++; if (failures < 10) $display("FAIL max c%0d y%0d x%0d: %0d exp %0d", c, y, x, got, m); end
    end
    // depthwise check
    for (int c = 0; c < C; c++) for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      longint s;
      int got, e;
      s = 0;
      for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) begin
        int iy, ix;
        iy = y - 1 + a; ix = x - 1 + b;
        if (iy >= 0 && iy < H && ix >= 0 && ix < W) s += longint'(xin[c][iy][ix]) * kwt[c][a*3+b];
      end
      s = (s + 16) >>> 5;
      e = (s > 32767) ? 32767 : (s < -32768) ? -32768 : int'(s);
      got = int'($signed(ob[1][x % 4][ob_addr(12'd300, 8'(H), 8'(W), 5'(c / 32), 8'(y), 8'(x))][c % 32]));
      checks++;
      if (got != e) begin failures++; if (failures < 10) $display("FAIL dw c%0d y%0d x%0d: %0d exp %0d", c, y, x, got, e); end
    end
    checks++;
    if (dones != 2) begin failures++; $display("FAIL done pulses %0d", dones); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
