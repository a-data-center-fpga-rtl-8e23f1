// ob_set_tb: random traffic on both ports of an OB set (port A on one bank,
// port B on either bank) against a reference model; checks the two port-A
// reads and the port-B read one cycle after they are issued, and that the
// two banks are independent.
module ob_set_tb;
  import cnn_pkg::*;
  localparam int D = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  logic a_bank, a_rd_en, a_wr_en, b_rd_en, b_rd_bank, b_wr_en, b_wr_bank;
  logic [5:0] a_rd_addr, a_rd_br_addr, a_wr_addr, b_rd_addr, b_wr_addr;
  logic [OBW-1:0] a_rd_data [LANES], a_rd_br_data [LANES], a_wr_data [LANES], b_rd_data [LANES], b_wr_data [LANES];
  logic [OBW-1:0] m [2][D][LANES];
  int checks = 0, failures = 0;
  ob_set #(.DEPTH(D)) dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic cmp(string n, logic [OBW-1:0] g [LANES], logic [OBW-1:0] e [LANES]);
    checks++;
    if (g != e) begin failures++; if (failures < 5) $display("FAIL %s", n); end
  endtask
  initial begin
    logic [OBW-1:0] ea [LANES], eb [LANES], ec [LANES];
    a_bank = 0; a_rd_en = 0; a_wr_en = 0; b_rd_en = 0; b_wr_en = 0; b_rd_bank = 0; b_wr_bank = 0;
    a_rd_addr = 0; a_rd_br_addr = 0; a_wr_addr = 0; b_rd_addr = 0; b_wr_addr = 0;
    // fill both banks through port B
    for (int bk = 0; bk < 2; bk++) for (int a = 0; a < D; a++) begin
      @(negedge clk);
      b_wr_en = 1; b_wr_bank = bk[0]; b_wr_addr = 6'(a);
      for (int l = 0; l < LANES; l++) b_wr_data[l] = $urandom;
      m[bk][a] = b_wr_data;
    end
    @(negedge clk); b_wr_en = 0;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      a_bank = 1'($urandom_range(0, 1));
      a_rd_en = 1; a_rd_addr = 6'($urandom_range(0, D-1)); a_rd_br_addr = 6'($urandom_range(0, D-1));
      b_rd_en = 1; b_rd_bank = ~a_bank; b_rd_addr = 6'($urandom_range(0, D-1));
      ea = m[a_bank][a_rd_addr]; eb = m[a_bank][a_rd_br_addr]; ec = m[b_rd_bank][b_rd_addr];
      a_wr_en = 1; a_wr_addr = 6'($urandom_range(0, D-1));
      for (int l = 0; l < LANES; l++) a_wr_data[l] = $urandom;
      b_wr_en = 1; b_wr_bank = ~a_bank; b_wr_addr = 6'($urandom_range(0, D-1));
      for (int l = 0; l < LANES; l++) b_wr_data[l] = $urandom;
      @(posedge clk);
      m[a_bank][a_wr_addr] = a_wr_data;
      m[b_wr_bank][b_wr_addr] = b_wr_data;
      #1;
      cmp("a", a_rd_data, ea); cmp("br", a_rd_br_data, eb); cmp("b", b_rd_data, ec);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
