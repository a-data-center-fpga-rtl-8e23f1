// assemble_reader_tb: fills four OB-set models with a 2-group 5 x 6 tensor in
// the interleaved layout (pixel x in set x mod 4) and checks that the
// assemble reader writes every pixel to the IB at ib_base + g*h*w + y*w + x
// with the 32 channel values in order, once each, then signals done.
module assemble_reader_tb;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, ob_rd_en, ob_rd_bank, ib_wr_en;
  asm_cmd_t cmd;
  logic [1:0] ob_rd_set, set_q;
  logic [11:0] ob_rd_addr, ib_wr_addr;
  logic [OBW-1:0] ob_rd_data [LANES];
  word_t ib_wr_data;
  logic [OBW-1:0] ob [2][4][1024][LANES];
  assemble_reader dut (.*);
  int checks = 0, failures = 0, nw = 0, dones = 0;
  int val [64][5][6];
  bit seen [4096];

  always @(posedge clk) if (ob_rd_en) ob_rd_data <= ob[ob_rd_bank][ob_rd_set][ob_rd_addr[9:0]];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    if (done) dones++;
    if (ib_wr_en) begin
      int i, g, y, x;
      i = int'(ib_wr_addr) - 1000; g = i / 30; y = (i % 30) / 6; x = i % 6;
      checks++;
      if (i < 0 || i >= 60 || seen[i]) begin failures++; $display("FAIL address %0d", ib_wr_addr); end
      else begin
        seen[i] = 1;
        checks += 32;
        for (int l = 0; l < 32; l++) if (ib_wr_data[l*16 +: 16] != 16'(val[g*32+l][y][x])) begin
          failures++;
          if (failures < 10) $display("FAIL g%0d y%0d x%0d lane %0d", g, y, x, l);
        end
      end
      nw++;
    end
  end

  initial begin
    foreach (ob[b, s, a, l]) ob[b][s][a][l] = $urandom;
    foreach (val[c, y, x]) begin
      val[c][y][x] = int'($urandom_range(0, 65535)) - 32768;
      ob[1][x % 4][ob_addr(12'd40, 8'd5, 8'd6, 5'(c / 32), 8'(y), 8'(x))][c % 32] = 32'(val[c][y][x]);
    end
    start = 0; cmd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    cmd.ob_bank = 1; cmd.ob_base = 40; cmd.h = 5; cmd.w = 6; cmd.groups = 2; cmd.ib_base = 1000;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (100) @(negedge clk);
    checks += 2;
    if (nw != 60) begin failures++; $display("FAIL %0d words", nw); end
    if (dones != 1 || busy) begin failures++; $display("FAIL done %0d busy %0d", dones, busy); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
