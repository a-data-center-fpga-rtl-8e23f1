// broadcast_cache_tb: a BC for SU 1 (of 4) with 2 channels per word, in
// three configurations: 3x3/stride 1/pad 1 on an 11 x 10 tile, 1x1 with
// kernel fusion Fu = 3 and stride 2, and 2x3 stride 1 for a narrow tile.
// A writer in the testbench sends the tile in raster order and obeys
// free_row (it may send row y only while y < free_row + 8); the tile is
// taller than the cache, so the writer must wait. The element stream is
// compared, element by element, with the sequence a reference walk of the
// SU's windows (columns 1, 5, 9, ...) produces.
module broadcast_cache_tb;
  import cnn_pkg::*;
  localparam int M = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, wr_valid, out_valid, out_first, out_last;
  logic [7:0] h, w, wr_y, wr_x, out_oy, out_ox;
  logic [2:0] kx, ky, stride;
  logic [1:0] pad;
  logic [4:0] fu;
  logic [M*DATA_W-1:0] wr_data;
  logic [8:0] free_row;
  data_t out_act [M];
  logic [3:0] out_waddr, out_f;
  broadcast_cache #(.SU_IDX(1), .M(M), .ROWS(8), .COLS(16)) dut (.*);

  int checks = 0, failures = 0, stalls = 0;
  int img [2][16][16];
  typedef struct { int a0, a1, waddr, first, last, f, oy, ox; } el_t;
  el_t eq [$];

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    el_t e;
    checks++;
    if (eq.size() == 0) begin failures++; $display("FAIL extra element"); end
    else begin
      e = eq.pop_front();
      if (out_act[0] != data_t'(e.a0) || out_act[1] != data_t'(e.a1) || out_waddr != 4'(e.waddr)
          || out_first != e.first[0] || out_last != e.last[0] || out_f != 4'(e.f)
          || out_oy != 8'(e.oy) || out_ox != 8'(e.ox)) begin
        failures++;
        if (failures < 10) $display("FAIL oy %0d ox %0d: act %0d/%0d exp %0d/%0d waddr %0d/%0d", e.oy, e.ox,
                                    out_act[0], out_act[1], e.a0, e.a1, out_waddr, e.waddr);
      end
    end
  end

  task automatic run(int hh, int ww, int kkx, int kky, int s, int p, int f);
    int oh, ow, y, x;
    oh = (hh + 2*p - kky) / s + 1;
    ow = (ww + 2*p - kkx) / s + 1;
    foreach (img[c, yy, xx]) img[c][yy][xx] = int'($urandom_range(0, 60000)) - 30000;
    for (int oy = 0; oy < oh; oy++)
      for (int ox = 1; ox < ow; ox += 4)
        for (int ff = 0; ff < f; ff++)
          for (int ey = 0; ey < kky; ey++)
            for (int ex = 0; ex < kkx; ex++) begin
              el_t e;
              int iy, ix;
              iy = oy*s - p + ey; ix = ox*s - p + ex;
              if (iy < 0 || ix < 0 || iy >= hh || ix >= ww) begin e.a0 = 0; e.a1 = 0; end
              else begin e.a0 = img[0][iy][ix]; e.a1 = img[1][iy][ix]; end
              e.waddr = ff*kkx*kky + ey*kkx + ex; e.first = (ey == 0 && ex == 0);
              e.last = (ey == kky-1 && ex == kkx-1); e.f = ff; e.oy = oy; e.ox = ox;
              eq.push_back(e);
            end
    @(negedge clk);
    start = 1; h = 8'(hh); w = 8'(ww); kx = 3'(kkx); ky = 3'(kky); stride = 3'(s); pad = 2'(p); fu = 5'(f);
    @(negedge clk);
    start = 0;
    y = 0; x = 0;
    while (y < hh) begin
      if (y < int'(free_row) + 8) begin
        wr_valid = 1; wr_y = 8'(y); wr_x = 8'(x);
        wr_data = {16'(img[1][y][x]), 16'(img[0][y][x])};
        if (x == ww - 1) begin x = 0; y++; end else x++;
      end else begin
        wr_valid = 0; stalls++;
      end
      @(negedge clk);
    end
    wr_valid = 0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (eq.size() != 0) begin failures++; $display("FAIL %0d elements missing", eq.size()); eq.delete(); end
  endtask

  initial begin
    start = 0; h = 0; w = 0; kx = 0; ky = 0; stride = 0; pad = 0; fu = 0;
    wr_valid = 0; wr_y = 0; wr_x = 0; wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(11, 10, 3, 3, 1, 1, 1);
    run(12, 13, 1, 1, 2, 0, 3);
    run(9, 3, 3, 2, 1, 0, 1);
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL writer never waited for free rows"); end
    $display("writer stalls: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
