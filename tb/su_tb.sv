// su_tb: checks a reduced supertile unit (M = 4 rows, N = 3 columns).
// Random weights are loaded column by column into both caches, then random
// windows (1..9 elements, random cache, back to back or with gaps) are
// streamed in. Every window result must equal the reference dot product of
// the window elements with the weights of each lane (lane j: buffer A of
// column j, lane j+N: buffer B) and must appear exactly M cycles after
// the window's last element.
module su_tb;
  import cnn_pkg::*;
  localparam int M = 4, N = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_cache, in_first, in_last, wr_en, wr_cache, wr_buf, out_valid;
  data_t in_act [M];
  logic [3:0] in_waddr, wr_addr;
  logic [23:0] in_meta, out_meta;
  logic [1:0] wr_col;
  data_t wr_data [M];
  acc_t out_sum [2*N];
  su #(.M(M), .N(N)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int w [2][2][N][M][16];
  typedef struct { longint s [2*N]; int t; int id; } exp_t;
  exp_t eq [$];
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor
  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    checks++;
    if (eq.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      e = eq.pop_front();
      if (cyc != e.t || out_meta != 24'(e.id)) begin
        failures++; $display("FAIL timing/id: cyc %0d exp %0d id %0d exp %0d", cyc, e.t, out_meta, e.id);
      end
      checks += 2*N;
      for (int l = 0; l < 2*N; l++) if (out_sum[l] !== acc_t'(e.s[l])) begin
        failures++;
        if (failures < 10) $display("FAIL window %0d lane %0d: %0d exp %0d", e.id, l, out_sum[l], e.s[l]);
      end
    end
  end

  initial begin
    in_valid = 0; in_cache = 0; in_first = 0; in_last = 0; in_waddr = 0; in_meta = 0;
    wr_en = 0; wr_cache = 0; wr_buf = 0; wr_addr = 0; wr_col = 0;
    for (int r = 0; r < M; r++) begin in_act[r] = 0; wr_data[r] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 2; c++) for (int j = 0; j < N; j++) for (int b = 0; b < 2; b++) for (int a = 0; a < 16; a++) begin
      @(negedge clk);
      wr_en = 1; wr_cache = c[0]; wr_col = 2'(j); wr_buf = b[0]; wr_addr = 4'(a);
      for (int r = 0; r < M; r++) begin
        w[c][b][j][r][a] = int'($urandom_range(0, 2000)) - 1000;
        wr_data[r] = data_t'(w[c][b][j][r][a]);
      end
    end
    @(negedge clk); wr_en = 0;
    for (int win = 0; win < 200; win++) begin
      exp_t e;
      int k, c;
      k = int'($urandom_range(1, 9));
      c = int'($urandom_range(0, 1));
      for (int l = 0; l < 2*N; l++) e.s[l] = 0;
      e.id = win;
      for (int el = 0; el < k; el++) begin
        int a;
        a = int'($urandom_range(0, 15));
        in_valid = 1; in_cache = c[0]; in_first = (el == 0); in_last = (el == k-1);
        in_waddr = 4'(a); in_meta = 24'(win);
        for (int r = 0; r < M; r++) begin
          in_act[r] = data_t'(int'($urandom_range(0, 4000)) - 2000);
          for (int j = 0; j < N; j++) begin
            e.s[j]   += longint'(in_act[r]) * w[c][0][j][r][a];
            e.s[j+N] += longint'(in_act[r]) * w[c][1][j][r][a];
          end
        end
        if (el == k-1) begin e.t = cyc + 1 + M; eq.push_back(e); end
        @(negedge clk);
        in_valid = 0;
        if ($urandom_range(0, 5) == 0) @(negedge clk);
      end
    end
    repeat (M + 5) @(negedge clk);
    checks++;
    if (eq.size() != 0) begin failures++; $display("FAIL %0d results missing", eq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
