// postproc_tb: drives random SU results through the fusion stage with an OB
// model behind it, in four modes: first slice with bias, middle slice
// (add temporary, store 32-bit running sum), last slice with branch add,
// relu and quantisation, and last slice without relu (negative outputs,
// saturation). Each written word is compared with a reference; the write
// must come exactly two cycles after the input.
module postproc_tb;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, acc_en, last_slice, bias_en, elt_en, relu_en, rd_en, wr_en;
  acc_t in_sum [LANES];
  logic [11:0] in_addr, in_br_addr, rd_addr, rd_br_addr, wr_addr;
  logic [3:0] in_f;
  logic [4:0] shift;
  data_t bias [16][LANES];
  logic [OBW-1:0] rd_data [LANES], rd_br_data [LANES], wr_data [LANES];
  logic [OBW-1:0] ob [4096][LANES];
  postproc dut (.*);
  int checks = 0, failures = 0, cyc = 0, sats = 0, relus = 0;
  typedef struct { int addr; longint v [LANES]; int t; } exp_t;
  exp_t eq [$];
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) begin
    if (rd_en) begin rd_data <= ob[rd_addr]; rd_br_data <= ob[rd_br_addr]; end
    if (wr_en) ob[wr_addr] <= wr_data;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && wr_en) begin
    exp_t e;
    checks++;
    e = eq.pop_front();
    if (cyc != e.t || int'(wr_addr) != e.addr) begin failures++; $display("FAIL timing/addr"); end
    checks += LANES;
    for (int l = 0; l < LANES; l++) if (wr_data[l] !== 32'(e.v[l])) begin
      failures++;
      if (failures < 10) $display("FAIL addr %0d lane %0d: %0d exp %0d", e.addr, l, $signed(wr_data[l]), e.v[l]);
    end
  end

  function automatic longint q16(longint x, int sh);
    longint r;
    r = (sh == 0) ? x : ((x + (longint'(1) <<< (sh - 1))) >>> sh);
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return r;
  endfunction
  function automatic longint s32(longint x);
    if (x > 64'sd2147483647) return 64'sd2147483647;
    if (x < -64'sd2147483648) return -64'sd2147483648;
    return x;
  endfunction

  task automatic pass(int mode, int range_bits);
    // mode 0: first+bias, 1: middle, 2: last+branch+relu, 3: last no relu
    @(negedge clk);
    acc_en = (mode != 0); last_slice = (mode >= 2); bias_en = (mode == 0); elt_en = (mode == 2);
    relu_en = (mode == 2); shift = 5'(mode >= 2 ? 6 : 3);
    for (int a = 0; a < 64; a++) begin
      exp_t e;
      in_valid = 1; in_addr = 12'(a); in_br_addr = 12'(1024 + a); in_f = 4'(a % 16);
      for (int l = 0; l < LANES; l++) begin
        longint t;
        in_sum[l] = acc_t'($signed({$urandom, $urandom})) >>> (64 - range_bits);
        t = longint'(in_sum[l]);
        if (acc_en) t += longint'($signed(ob[a][l]));
        else if (bias_en) t += longint'(bias[a % 16][l]) <<< int'(shift);
        if (last_slice) begin
          if (elt_en) t += longint'($signed(ob[1024 + a][l][15:0])) <<< int'(shift);
          if (relu_en && t < 0) begin t = 0; relus++; end
          if (q16(t, int'(shift)) == 32767 || q16(t, int'(shift)) == -32768) sats++;
          t = q16(t, int'(shift));
        end
        e.v[l] = s32(t);
      end
      e.addr = a; e.t = cyc + 2;
      eq.push_back(e);
      @(negedge clk);
    end
    in_valid = 0;
    repeat (4) @(negedge clk);
  endtask

  initial begin
    in_valid = 0; acc_en = 0; last_slice = 0; bias_en = 0; elt_en = 0; relu_en = 0; shift = 0;
    in_addr = 0; in_br_addr = 0; in_f = 0;
    for (int l = 0; l < LANES; l++) in_sum[l] = 0;
    foreach (bias[f, l]) bias[f][l] = data_t'($urandom);
    foreach (ob[a, l]) ob[a][l] = $urandom;
    repeat (2) @(posedge clk);
    rst_n = 1;
    pass(0, 30);
    pass(1, 30);
    pass(2, 24);
    pass(3, 26);
    checks += 3;
    if (eq.size() != 0) begin failures++; $display("FAIL missing writes"); end
    if (sats == 0) begin failures++; $display("FAIL no saturation seen"); end
    if (relus == 0) begin failures++; $display("FAIL no relu seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
