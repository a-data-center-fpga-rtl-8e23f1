// epe_tb: checks the enhanced processing element. Random weights go into
// both caches and both buffers; then random activations and cascade inputs
// are applied and each cascade output must equal cin + act * w for the
// selected cache, one cycle later. Writes into the idle cache during
// computation must not disturb the running one (ping-pong).
module epe_tb;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  data_t act, wr_data;
  logic [3:0] rd_addr, wr_addr;
  logic rd_cache, wr_en, wr_cache, wr_buf;
  acc_t cin_a, cin_b, cout_a, cout_b;
  int checks = 0, failures = 0;
  int w [2][2][16];

  epe dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    acc_t ea, eb;
    act = 0; wr_data = 0; rd_addr = 0; wr_addr = 0; rd_cache = 0; wr_en = 0; wr_cache = 0; wr_buf = 0;
    cin_a = 0; cin_b = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 2; c++) for (int b = 0; b < 2; b++) for (int a = 0; a < 16; a++) begin
      @(negedge clk);
      w[c][b][a] = int'($urandom_range(0, 65535)) - 32768;
      wr_en = 1; wr_cache = c[0]; wr_buf = b[0]; wr_addr = 4'(a); wr_data = data_t'(w[c][b][a]);
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      act = data_t'(int'($urandom_range(0, 65535)) - 32768);
      rd_addr = 4'($urandom_range(0, 15));
      rd_cache = 1'($urandom_range(0, 1));
      cin_a = acc_t'($signed({$urandom, $urandom})) >>> 20;
      cin_b = acc_t'($signed({$urandom, $urandom})) >>> 20;
      // concurrent update of the idle cache
      wr_en = 1; wr_cache = ~rd_cache; wr_buf = 1'($urandom_range(0, 1)); wr_addr = 4'($urandom_range(0, 15));
      wr_data = data_t'(int'($urandom_range(0, 65535)) - 32768);
      ea = cin_a + acc_t'(act) * acc_t'(w[rd_cache][0][rd_addr]);
      eb = cin_b + acc_t'(act) * acc_t'(w[rd_cache][1][rd_addr]);
      @(posedge clk);
      w[wr_cache][wr_buf][wr_addr] = int'(wr_data);
      #1;
      checks += 2;
      if (cout_a !== ea || cout_b !== eb) begin
        failures++;
        if (failures < 10) $display("FAIL i=%0d a %0d/%0d b %0d/%0d", i, cout_a, ea, cout_b, eb);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
