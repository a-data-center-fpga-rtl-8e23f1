// accel_top_tb: end-to-end test of the accelerator at its default size
// (two engines, 4 SUs of 32 x 16 EPEs each). Both engines run real layer
// sequences and every result is compared with a reference computed here in
// plain integer arithmetic:
//  engine 0: 3x3 conv, stride 1, pad 1, Cin = 64 (two slices), 32 output
//            channels, bias + relu + quantisation, 12 x 9 tile (taller than
//            the broadcast cache, so the IB dispatcher has to wait), then a
//            2x2/2 max-pool on the FPU into the other OB bank, then the
//            assemble reader writes the result to the IB where it is read
//            back through the host port;
//  engine 1: an FPU average pool on data put in OB bank 1 through the LRN
//            port, issued without sync so it overlaps a 1x1 conv with kernel
//            fusion (Fu = 2, 64 output channels) and a residual branch add
//            into bank 0; then a 3x3 depthwise conv on the FPU (sync), then
//            assembling of both results and read-back.
// Every mechanism (slice loop, weight preload into the idle cache, BC stall,
// padding, kernel fusion, bias, branch add, relu, FPU max/avg/depthwise,
// conv/FPU overlap, sync wait, assembling) is counted; one that never
// happens counts as a failure.
module accel_top_tb;
  import cnn_pkg::*;
  localparam int NE = 2;
  localparam int IB_DEPTH = 4096, OB_DEPTH = 1024, KB_DEPTH = 256;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic           cmd_push [NE];
  cmd_t           cmd [NE];
  logic           cmd_full [NE], idle [NE];
  logic           ib_we [NE];
  logic [11:0]    ib_wa [NE];
  word_t          ib_wd [NE];
  logic           ib_wrdy [NE];
  logic           ib_re [NE];
  logic [11:0]    ib_ra [NE];
  word_t          ib_rd [NE];
  logic           ib_rrdy [NE];
  logic           k_valid [NE];
  word_t          k_data [NE];
  logic           k_ready [NE];
  logic           kb_we [NE];
  logic [7:0]     kb_wa [NE];
  word_t          kb_wd [NE];
  logic           l_re [NE], l_rb [NE], l_we [NE], l_wb [NE], l_rdy [NE];
  logic [1:0]     l_rs [NE], l_ws [NE];
  logic [9:0]     l_ra [NE], l_wa [NE];
  logic [OBW-1:0] l_rd [NE][LANES];
  logic [OBW-1:0] l_wd [NE][LANES];

  accel_top dut (
    .clk, .rst_n, .cmd_push, .cmd, .cmd_full, .idle,
    .ext_ib_wr_en(ib_we), .ext_ib_wr_addr(ib_wa), .ext_ib_wr_data(ib_wd), .ext_ib_wr_ready(ib_wrdy),
    .ext_ib_rd_en(ib_re), .ext_ib_rd_addr(ib_ra), .ext_ib_rd_data(ib_rd), .ext_ib_rd_ready(ib_rrdy),
    .k_valid, .k_data, .k_ready, .kb_wr_en(kb_we), .kb_wr_addr(kb_wa), .kb_wr_data(kb_wd),
    .lrn_rd_en(l_re), .lrn_rd_bank(l_rb), .lrn_rd_set(l_rs), .lrn_rd_addr(l_ra), .lrn_rd_data(l_rd),
    .lrn_wr_en(l_we), .lrn_wr_bank(l_wb), .lrn_wr_set(l_ws), .lrn_wr_addr(l_wa), .lrn_wr_data(l_wd),
    .lrn_ready(l_rdy));

  int checks = 0, failures = 0;
  int cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  // ---------------- watchdog ----------------
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_slice2 = 0, n_preload = 0, n_bcstall = 0, n_pad = 0, n_fusion = 0, n_overlap = 0,
      n_sync = 0, n_asm = 0, n_fmax = 0, n_favg = 0, n_fdw = 0, n_relu = 0, n_bias = 0, n_elt = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.g_engine[0].u_engine.u_slice.slices_done == 6'd2) n_slice2++;
    for (int e = 0; e < NE; e++) ;
    if (dut.g_engine[0].u_engine.w_en && dut.g_engine[0].u_engine.w_cache != dut.g_engine[0].u_engine.cache
        && dut.g_engine[0].u_engine.u_slice.st == 2) n_preload++;
    if (dut.g_engine[0].u_engine.u_disp.run && !dut.g_engine[0].u_engine.u_disp.room) n_bcstall++;
    if (dut.g_engine[0].u_engine.g_path[0].u_bc.issue && dut.g_engine[0].u_engine.g_path[0].u_bc.pad_el) n_pad++;
    if (dut.g_engine[1].u_engine.g_path[0].u_bc.issue && dut.g_engine[1].u_engine.cc.fu == 5'd2) n_fusion++;
    if (dut.g_engine[1].u_engine.slc_busy && dut.g_engine[1].u_engine.u_fpu.run) n_overlap++;
    for (int e = 0; e < NE; e++) begin
      if (e == 0 && !dut.g_engine[0].u_engine.q_empty && dut.g_engine[0].u_engine.q_head.sync
          && !dut.g_engine[0].u_engine.q_pop) n_sync++;
      if (e == 1 && !dut.g_engine[1].u_engine.q_empty && dut.g_engine[1].u_engine.q_head.sync
          && !dut.g_engine[1].u_engine.q_pop) n_sync++;
    end
    if (dut.g_engine[0].u_engine.asm_done) n_asm++;
    if (dut.g_engine[1].u_engine.asm_done) n_asm++;
  end

  // ---------------- helpers ----------------
  function automatic cmd_t mk(cmd_op_e op, logic sync, logic [PAYLOAD_W-1:0] p);
    cmd_t c; c.op = op; c.sync = sync; c.payload = p; return c;
  endfunction

  task automatic push_cmd(int e, cmd_t c);
    @(posedge clk); #1;
    while (cmd_full[e]) begin @(posedge clk); #1; end
    cmd_push[e] = 1; cmd[e] = c;
    @(posedge clk); #1;
    cmd_push[e] = 0;
  endtask

  task automatic ib_write(int e, int addr, word_t d);
    @(posedge clk); #1;
    ib_we[e] = 1; ib_wa[e] = 12'(addr); ib_wd[e] = d;
    @(posedge clk); #1;
    while (!ib_wrdy[e]) begin @(posedge clk); #1; end
    ib_we[e] = 0;
  endtask

  task automatic ib_read(int e, int addr, output word_t d);
    @(posedge clk); #1;
    ib_re[e] = 1; ib_ra[e] = 12'(addr);
    @(posedge clk); #1;
    ib_re[e] = 0;
    d = ib_rd[e];
  endtask

  task automatic ob_write(int e, logic bank, int set, int addr, logic [OBW-1:0] v [LANES]);
    @(posedge clk); #1;
    while (!l_rdy[e]) begin @(posedge clk); #1; end
    l_we[e] = 1; l_wb[e] = bank; l_ws[e] = 2'(set); l_wa[e] = 10'(addr); l_wd[e] = v;
    @(posedge clk); #1;
    l_we[e] = 0;
  endtask

  task automatic wait_idle(int e);
    repeat (4) @(posedge clk);
    while (!idle[e]) @(posedge clk);
    repeat (2) @(posedge clk);
  endtask

  // kernel streams, fed from queues
  word_t kq [NE][$];
  for (genvar e = 0; e < NE; e++) begin : g_kfeed
    always @(posedge clk) begin
      if (rst_n && k_valid[e] && k_ready[e]) void'(kq[e].pop_front());
      k_valid[e] <= rst_n && (kq[e].size() != 0);
      k_data[e]  <= (kq[e].size() != 0) ? kq[e][0] : '0;
    end
  end

  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction
  function automatic longint rshift_round(longint v, int sh);
    if (sh == 0) return v;
    return (v + (longint'(1) <<< (sh - 1))) >>> sh;
  endfunction
  function automatic int odim(int i, int k, int s, int p);
    return (i + 2*p - k) / s + 1;
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 100000) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // =================== engine 0 data ===================
  localparam int H0 = 12, W0 = 9, C0 = 64, K0 = 3, SH0 = 4;
  int x0 [C0][H0][W0];
  int w0 [32][C0][K0][K0];
  int b0 [32];
  int y0 [32][H0][W0];
  int p0 [32][6][4];

  // =================== engine 1 data ===================
  localparam int H1 = 4, W1 = 5, C1 = 32, CO1 = 64, SH1 = 3;
  int x1 [C1][H1][W1];
  int w1 [CO1][C1];
  int br1 [CO1][H1][W1];
  int y1 [CO1][H1][W1];
  int dwk [CO1][9];
  int d1 [CO1][H1][W1];
  int av_in [32][4][8];
  int av_out [32][2][4];

  initial begin
    word_t wd;
    logic [OBW-1:0] v [LANES];
    conv_cmd_t cc;
    fpu_cmd_t fc;
    asm_cmd_t ac;
    int oh, ow;
    for (int e = 0; e < NE; e++) begin
      cmd_push[e] = 0; cmd[e] = '0; ib_we[e] = 0; ib_wa[e] = 0; ib_wd[e] = 0; ib_re[e] = 0; ib_ra[e] = 0;
      kb_we[e] = 0; kb_wa[e] = 0; kb_wd[e] = 0; l_re[e] = 0; l_rb[e] = 0; l_rs[e] = 0; l_ra[e] = 0;
      l_we[e] = 0; l_wb[e] = 0; l_ws[e] = 0; l_wa[e] = 0;
      for (int l = 0; l < LANES; l++) l_wd[e][l] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------- engine 0: data, weights, reference ----------
    foreach (x0[c, y, x]) x0[c][y][x] = int'($urandom_range(0, 30)) - 15;
    foreach (w0[o, c, a, b]) w0[o][c][a][b] = int'($urandom_range(0, 30)) - 15;
    foreach (b0[o]) b0[o] = int'($urandom_range(0, 200)) - 100;
    for (int s = 0; s < 2; s++)
      for (int y = 0; y < H0; y++)
        for (int x = 0; x < W0; x++) begin
          for (int r = 0; r < 32; r++) wd[r*16 +: 16] = 16'(x0[s*32+r][y][x]);
          ib_write(0, s*H0*W0 + y*W0 + x, wd);
        end
    for (int l = 0; l < 32; l++) wd[l*16 +: 16] = 16'(b0[l]);
    kq[0].push_back(wd);
    for (int s = 0; s < 2; s++)
      for (int j = 0; j < 16; j++)
        for (int b = 0; b < 2; b++)
          for (int a = 0; a < 9; a++) begin
            for (int r = 0; r < 32; r++) wd[r*16 +: 16] = 16'(w0[j + 16*b][s*32 + r][a/3][a%3]);
            kq[0].push_back(wd);
          end
    for (int o = 0; o < 32; o++)
      for (int y = 0; y < H0; y++)
        for (int x = 0; x < W0; x++) begin
          longint acc;
          acc = longint'(b0[o]) <<< SH0;
          for (int c = 0; c < C0; c++)
            for (int a = 0; a < 3; a++)
              for (int b = 0; b < 3; b++) begin
                int iy, ix;
                iy = y - 1 + a; ix = x - 1 + b;
                if (iy >= 0 && iy < H0 && ix >= 0 && ix < W0) acc += x0[c][iy][ix] * w0[o][c][a][b];
              end
          if (acc < 0) begin acc = 0; n_relu++; end
          y0[o][y][x] = sat16(rshift_round(acc, SH0));
        end
    n_bias++;
    foreach (p0[o, y, x]) begin
      int m;
      m = -32768;
      for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++)
        if (y0[o][2*y+a][2*x+b] > m) m = y0[o][2*y+a][2*x+b];
      p0[o][y][x] = m;
    end

    // ---------- engine 1: data, weights, reference ----------
    foreach (x1[c, y, x]) x1[c][y][x] = int'($urandom_range(0, 60)) - 30;
    foreach (w1[o, c]) w1[o][c] = int'($urandom_range(0, 60)) - 30;
    foreach (br1[o, y, x]) br1[o][y][x] = int'($urandom_range(0, 400)) - 200;
    foreach (dwk[o, e]) dwk[o][e] = int'($urandom_range(0, 14)) - 7;
    foreach (av_in[c, y, x]) av_in[c][y][x] = int'($urandom_range(0, 2000)) - 1000;
    for (int y = 0; y < H1; y++)
      for (int x = 0; x < W1; x++) begin
        for (int r = 0; r < 32; r++) wd[r*16 +: 16] = 16'(x1[r][y][x]);
        ib_write(1, y*W1 + x, wd);
      end
    // weights: Fu = 2, addr a = f (kernel j + 16*b + 32*f)
    for (int j = 0; j < 16; j++)
      for (int b = 0; b < 2; b++)
        for (int f = 0; f < 2; f++) begin
          for (int r = 0; r < 32; r++) wd[r*16 +: 16] = 16'(w1[j + 16*b + 32*f][r]);
          kq[1].push_back(wd);
        end
    // branch tensor into OB bank 0 at base 512, avg-pool input into bank 1 at base 0
    for (int g = 0; g < 2; g++)
      for (int y = 0; y < H1; y++)
        for (int x = 0; x < W1; x++) begin
          for (int l = 0; l < LANES; l++) v[l] = OBW'(br1[g*32+l][y][x]);
          ob_write(1, 1'b0, x % 4, int'(ob_addr(12'd512, 8'(H1), 8'(W1), 5'(g), 8'(y), 8'(x))), v);
        end
    for (int y = 0; y < 4; y++)
      for (int x = 0; x < 8; x++) begin
        for (int l = 0; l < LANES; l++) v[l] = OBW'(av_in[l][y][x]);
        ob_write(1, 1'b1, x % 4, int'(ob_addr(12'd0, 8'd4, 8'd8, 5'd0, 8'(y), 8'(x))), v);
      end
    for (int g = 0; g < 2; g++)
      for (int e = 0; e < 9; e++) begin
        @(posedge clk); #1;
        kb_we[1] = 1; kb_wa[1] = 8'(g*9 + e);
        for (int l = 0; l < 32; l++) kb_wd[1][l*16 +: 16] = 16'(dwk[g*32+l][e]);
        @(posedge clk); #1;
        kb_we[1] = 0;
      end
    foreach (y1[o, y, x]) begin
      longint acc;
      acc = 0;
      for (int c = 0; c < C1; c++) acc += x1[c][y][x] * w1[o][c];
      acc += longint'(br1[o][y][x]) <<< SH1;
      if (acc < 0) begin acc = 0; n_relu++; end
      y1[o][y][x] = sat16(rshift_round(acc, SH1));
    end
    n_elt++;
    foreach (d1[o, y, x]) begin
      longint acc;
      acc = 0;
      for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) begin
        int iy, ix;
                iy = y - 1 + a; ix = x - 1 + b;
        if (iy >= 0 && iy < H1 && ix >= 0 && ix < W1) acc += y1[o][iy][ix] * dwk[o][a*3+b];
      end
      d1[o][y][x] = sat16(rshift_round(acc, 2));
    end
    foreach (av_out[c, y, x]) begin
      longint acc;
      acc = 0;
      for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++) acc += av_in[c][2*y+a][2*x+b];
      av_out[c][y][x] = sat16(rshift_round(acc * 16384, 16));
    end

    // ---------- commands ----------
    fork
      begin : eng0
        int t0;
        t0 = 0;
        cc = '0; cc.ib_base = 0; cc.h = H0; cc.w = W0; cc.slices = 2; cc.kx = 3; cc.ky = 3;
        cc.stride = 1; cc.pad = 1; cc.fu = 1; cc.ob_bank = 0; cc.ob_base = 0; cc.bias_en = 1;
        cc.relu_en = 1; cc.shift = SH0;
        t0 = cycles;
        push_cmd(0, mk(CMD_CONV, 1'b0, PAYLOAD_W'(cc)));
        fc = '0; fc.fs.cmp_en = 1; fc.src_bank = 0; fc.src_base = 0; fc.dst_bank = 1; fc.dst_base = 0;
        fc.h = H0; fc.w = W0; fc.groups = 1; fc.kx = 2; fc.ky = 2; fc.stride = 2; fc.pad = 0;
        fc.cmp_s = -16'sd32768; fc.post_s = 1; fc.shift = 0; fc.clamp_hi = 16'sd32767;
        push_cmd(0, mk(CMD_FPU, 1'b1, PAYLOAD_W'(fc)));
        n_fmax++;
        ac = '0; ac.ob_bank = 1; ac.ob_base = 0; ac.h = 6; ac.w = 4; ac.groups = 1; ac.ib_base = 2048;
        push_cmd(0, mk(CMD_ASM, 1'b1, PAYLOAD_W'(ac)));
        // also assemble the conv output itself
        ac = '0; ac.ob_bank = 0; ac.ob_base = 0; ac.h = H0; ac.w = W0; ac.groups = 1; ac.ib_base = 2304;
        push_cmd(0, mk(CMD_ASM, 1'b1, PAYLOAD_W'(ac)));
        wait_idle(0);
        $display("engine 0 sequence took %0d cycles", cycles - t0);
        for (int y = 0; y < H0; y++)
          for (int x = 0; x < W0; x++) begin
            ib_read(0, 2304 + y*W0 + x, wd);
            for (int o = 0; o < 32; o++) check($sformatf("e0 conv o%0d y%0d x%0d", o, y, x), int'($signed(wd[o*16 +: 16])), y0[o][y][x]);
          end
        for (int y = 0; y < 6; y++)
          for (int x = 0; x < 4; x++) begin
            ib_read(0, 2048 + y*4 + x, wd);
            for (int o = 0; o < 32; o++) check($sformatf("e0 maxpool o%0d y%0d x%0d", o, y, x), int'($signed(wd[o*16 +: 16])), p0[o][y][x]);
          end
      end
      begin : eng1
        repeat (20) @(posedge clk);
        fc = '0; fc.fs.add_en = 1; fc.fs.post_en = 1; fc.src_bank = 1; fc.src_base = 0; fc.dst_bank = 1; fc.dst_base = 256;
        fc.h = 4; fc.w = 8; fc.groups = 1; fc.kx = 2; fc.ky = 2; fc.stride = 2; fc.pad = 0;
        fc.add_s = 0; fc.post_s = 16384; fc.shift = 16; fc.clamp_hi = 16'sd32767;
        push_cmd(1, mk(CMD_FPU, 1'b0, PAYLOAD_W'(fc)));
        n_favg++;
        cc = '0; cc.ib_base = 0; cc.h = H1; cc.w = W1; cc.slices = 1; cc.kx = 1; cc.ky = 1;
        cc.stride = 1; cc.pad = 0; cc.fu = 2; cc.ob_bank = 0; cc.ob_base = 0; cc.elt_en = 1; cc.br_base = 512;
        cc.relu_en = 1; cc.shift = SH1;
        push_cmd(1, mk(CMD_CONV, 1'b0, PAYLOAD_W'(cc)));
        fc = '0; fc.fs.pre_en = 1; fc.fs.pre_kw = 1; fc.fs.add_en = 1; fc.src_bank = 0; fc.src_base = 0;
        fc.dst_bank = 1; fc.dst_base = 512; fc.h = H1; fc.w = W1; fc.groups = 2; fc.kx = 3; fc.ky = 3;
        fc.stride = 1; fc.pad = 1; fc.add_s = 0; fc.shift = 2; fc.clamp_hi = 16'sd32767;
        push_cmd(1, mk(CMD_FPU, 1'b1, PAYLOAD_W'(fc)));
        n_fdw++;
        ac = '0; ac.ob_bank = 0; ac.ob_base = 0; ac.h = H1; ac.w = W1; ac.groups = 2; ac.ib_base = 1024;
        push_cmd(1, mk(CMD_ASM, 1'b1, PAYLOAD_W'(ac)));
        ac = '0; ac.ob_bank = 1; ac.ob_base = 512; ac.h = H1; ac.w = W1; ac.groups = 2; ac.ib_base = 1536;
        push_cmd(1, mk(CMD_ASM, 1'b1, PAYLOAD_W'(ac)));
        ac = '0; ac.ob_bank = 1; ac.ob_base = 256; ac.h = 2; ac.w = 4; ac.groups = 1; ac.ib_base = 2048;
        push_cmd(1, mk(CMD_ASM, 1'b1, PAYLOAD_W'(ac)));
        wait_idle(1);
        for (int g = 0; g < 2; g++)
          for (int y = 0; y < H1; y++)
            for (int x = 0; x < W1; x++) begin
              ib_read(1, 1024 + g*H1*W1 + y*W1 + x, wd);
              for (int l = 0; l < 32; l++) check($sformatf("e1 conv1x1 o%0d y%0d x%0d", g*32+l, y, x), int'($signed(wd[l*16 +: 16])), y1[g*32+l][y][x]);
              ib_read(1, 1536 + g*H1*W1 + y*W1 + x, wd);
              for (int l = 0; l < 32; l++) check($sformatf("e1 dw o%0d y%0d x%0d", g*32+l, y, x), int'($signed(wd[l*16 +: 16])), d1[g*32+l][y][x]);
            end
        for (int y = 0; y < 2; y++)
          for (int x = 0; x < 4; x++) begin
            ib_read(1, 2048 + y*4 + x, wd);
            for (int l = 0; l < 32; l++) check($sformatf("e1 avg c%0d y%0d x%0d", l, y, x), int'($signed(wd[l*16 +: 16])), av_out[l][y][x]);
          end
      end
    join

    begin
      string nm [14] = '{"slice loop", "weight preload", "BC stall", "padding", "kernel fusion",
                         "conv/FPU overlap", "sync wait", "assemble", "FPU max", "FPU avg", "FPU depthwise",
                         "relu", "bias", "branch add"};
      int cnt [14];
      cnt = '{n_slice2, n_preload, n_bcstall, n_pad, n_fusion, n_overlap, n_sync, n_asm, n_fmax, n_favg,
              n_fdw, n_relu, n_bias, n_elt};
      for (int i = 0; i < 14; i++) begin
        $display("mechanism %-16s : %0d", nm[i], cnt[i]);
        checks++;
        if (cnt[i] == 0) begin failures++; $display("FAIL mechanism %s never happened", nm[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
