// kernel_load_ctl_tb: a conv with bias, Fu = 1, 3x3 kernels and three
// slices. The testbench streams fu bias words and 3 x 16 x 2 x 9 weight
// words with random valid gaps, and checks (1) the bias registers, (2) that
// every weight write goes to the expected column, buffer, address and cache
// (slice mod 2) with the expected data, (3) that slice 2 is not loaded
// before slice 0 has been reported done (ping-pong), and (4) the loaded
// count.
module kernel_load_ctl_tb;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, bias_en, busy, k_valid, k_ready, wr_en, wr_cache, wr_buf;
  logic [4:0] slices, fu;
  logic [2:0] kx, ky;
  logic [5:0] slices_done, loaded;
  word_t k_data;
  logic [3:0] wr_col, wr_addr;
  data_t wr_data [32];
  data_t bias [16][LANES];
  kernel_load_ctl dut (.*);
  int checks = 0, failures = 0, nw = 0, blocked = 0;
  word_t words [$];
  word_t sent [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && wr_en) begin
    int s, j, b, a, i;
    i = nw; s = i / 288; i = i % 288; j = i / 18; i = i % 18; b = i / 9; a = i % 9;
    checks++;
    if (wr_col != 4'(j) || wr_buf != b[0] || wr_addr != 4'(a) || wr_cache != s[0]
        || wr_data[0] != data_t'(sent[1 + nw][15:0]) || wr_data[31] != data_t'(sent[1 + nw][511:496])) begin
      failures++;
      if (failures < 5) $display("FAIL write %0d col %0d buf %0d addr %0d cache %0d", nw, wr_col, wr_buf, wr_addr, wr_cache);
    end
    checks++;
    if (s >= int'(slices_done) + 2) begin failures++; $display("FAIL slice %0d loaded too early", s); end
    nw++;
  end

  initial begin
    word_t wd;
    start = 0; bias_en = 1; slices = 3; fu = 1; kx = 3; ky = 3; slices_done = 0; k_valid = 0; k_data = 0;
    for (int i = 0; i < 1 + 3*288; i++) begin
      for (int k = 0; k < 16; k++) wd[k*32 +: 32] = $urandom;
      words.push_back(wd);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    fork
      begin
        while (words.size() != 0) begin
          k_valid = ($urandom_range(0, 3) != 0);
          k_data = words[0];
          @(posedge clk);
          if (k_valid && k_ready) sent.push_back(words.pop_front());
          if (k_valid && !k_ready) blocked++;
          @(negedge clk);
        end
        k_valid = 0;
      end
      begin
        wait (loaded == 6'd2);
        repeat (50) @(negedge clk);
        checks++;
        if (nw != 576) begin failures++; $display("FAIL slice 2 started before slice 0 done (%0d)", nw); end
        slices_done = 1;
      end
    join
    repeat (5) @(negedge clk);
    checks += 3;
    if (loaded != 6'd3) begin failures++; $display("FAIL loaded %0d", loaded); end
    if (blocked == 0) begin failures++; $display("FAIL never back-pressured"); end
    if (busy) begin failures++; $display("FAIL still busy"); end
    for (int l = 0; l < LANES; l++) begin
      checks++;
      if (bias[0][l] != data_t'(sent[0][l*16 +: 16])) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
