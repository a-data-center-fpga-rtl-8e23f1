// ib_dispatcher_tb: the dispatcher reads a 7 x 5 slice from an IB model
// (synchronous read, one cycle) and must broadcast every word once, in
// raster order, with its (y, x) tag and the data stored at base + y*w + x.
// The testbench holds the BCs' free_row low for a while (room for rows 0..2
// only, ROWS = 3) and checks that no row beyond the allowed one is sent and
// that the dispatcher waits.
module ib_dispatcher_tb;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, ib_rd_en, bc_wr_valid;
  logic [11:0] base, ib_rd_addr;
  logic [7:0] h, w, bc_wr_y, bc_wr_x;
  logic [8:0] free_row [4];
  word_t ib_rd_data, bc_wr_data;
  word_t ibm [4096];
  ib_dispatcher #(.NBC(4), .ROWS(3), .AW(12)) dut (.*);
  int checks = 0, failures = 0, waits = 0, n = 0, dones = 0;

  always @(posedge clk) if (ib_rd_en) ib_rd_data <= ibm[ib_rd_addr];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    if (done) dones++;
    if (busy && !ib_rd_en && !bc_wr_valid) waits++;
    if (bc_wr_valid) begin
      int ey, ex;
      ey = n / 5; ex = n % 5;
      checks++;
      if (bc_wr_y != 8'(ey) || bc_wr_x != 8'(ex) || bc_wr_data !== ibm[100 + ey*5 + ex]) begin
        failures++; $display("FAIL word %0d: y %0d x %0d", n, bc_wr_y, bc_wr_x);
      end
      checks++;
      if (int'(bc_wr_y) >= int'(free_row[2]) + 3) begin failures++; $display("FAIL row %0d sent without room", bc_wr_y); end
      n++;
    end
  end

  initial begin
    foreach (ibm[i]) for (int k = 0; k < 16; k++) ibm[i][k*32 +: 32] = $urandom;
    start = 0; base = 100; h = 7; w = 5;
    for (int i = 0; i < 4; i++) free_row[i] = 9'd0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (40) @(negedge clk);
    checks++;
    if (n != 15) begin failures++; $display("FAIL %0d words before room was given, expected 15", n); end
    for (int i = 0; i < 4; i++) free_row[i] = (i == 2) ? 9'd2 : 9'd5;
    repeat (20) @(negedge clk);
    for (int i = 0; i < 4; i++) free_row[i] = 9'd256;
    repeat (40) @(negedge clk);
    checks += 3;
    if (n != 35) begin failures++; $display("FAIL %0d words sent, expected 35", n); end
    if (dones != 1) begin failures++; $display("FAIL done seen %0d times", dones); end
    if (waits == 0) begin failures++; $display("FAIL never waited"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
