// input_buffer_tb: random writes then reads of the IB, with a reference
// array; read data must appear one cycle after rd_en. Also writes and reads
// in the same cycle to different addresses.
module input_buffer_tb;
  import cnn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rd_en, wr_en;
  logic [11:0] rd_addr, wr_addr;
  word_t rd_data, wr_data;
  word_t ref_m [4096];
  bit    valid_m [4096];
  int checks = 0, failures = 0;
  input_buffer dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    word_t exp;
    rd_en = 0; wr_en = 0; rd_addr = 0; wr_addr = 0; wr_data = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 12'($urandom_range(0, 4095));
      for (int k = 0; k < 16; k++) wr_data[k*32 +: 32] = $urandom;
      ref_m[wr_addr] = wr_data; valid_m[wr_addr] = 1;
      rd_en = 0;
      if (i > 10) begin
        do rd_addr = 12'($urandom_range(0, 4095)); while (!valid_m[rd_addr] || rd_addr == wr_addr);
        rd_en = 1;
      end
      exp = ref_m[rd_addr];
      @(posedge clk); #1;
      if (rd_en) begin
        checks++;
        if (rd_data !== exp) begin failures++; if (failures < 5) $display("FAIL addr %0d", rd_addr); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
