// fpu_alu_tb: one FPU lane configured as max-pool (with padding elements),
// average pool, relu, relu6, linear transform and depthwise convolution.
// Random windows are streamed back to back; each window result is compared
// with a reference and must appear three cycles after the window's last
// element.
module fpu_alu_tb;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_pad, in_first, in_last, out_valid;
  data_t x, kw, pre_s, add_s, cmp_s, post_s, clamp_hi, y;
  logic [15:0] in_meta, out_meta;
  funcset_t fs;
  logic [4:0] shift;
  fpu_alu dut (.*);
  int checks = 0, failures = 0, cyc = 0;
  typedef struct { int v; int t; int id; } exp_t;
  exp_t eq [$];
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    checks++;
    e = eq.pop_front();
    if (y != data_t'(e.v) || cyc != e.t || out_meta != 16'(e.id)) begin
      failures++;
      if (failures < 10) $display("FAIL window %0d: %0d exp %0d (t %0d/%0d)", e.id, y, e.v, cyc, e.t);
    end
  end

  function automatic int fin(longint m, int sh, int hi);
    longint q;
    q = (sh == 0) ? m : ((m + (longint'(1) <<< (sh - 1))) >>> sh);
    if (q > hi) q = hi;
    if (q < -32768) q = -32768;
    return int'(q);
  endfunction

  int id = 0;
  task automatic mode(int md, int nwin);
    // 0 max, 1 avg, 2 relu, 3 relu6, 4 linear, 5 depthwise
    @(negedge clk);
    fs = '0;
    case (md)
      0: begin fs.cmp_en = 1; cmp_s = -16'sd32768; shift = 0; clamp_hi = 32767; end
      1: begin fs.add_en = 1; fs.post_en = 1; add_s = 0; post_s = 16'sd7282; shift = 16; clamp_hi = 32767; end
      2: begin fs.cmp_en = 1; cmp_s = 0; shift = 0; clamp_hi = 32767; end
      3: begin fs.cmp_en = 1; cmp_s = 0; shift = 0; clamp_hi = 16'sd96; end
      4: begin fs.pre_en = 1; fs.add_en = 1; pre_s = 16'sd3; add_s = 16'sd100; shift = 2; clamp_hi = 32767; end
      default: begin fs.pre_en = 1; fs.pre_kw = 1; fs.add_en = 1; add_s = 0; shift = 4; clamp_hi = 32767; end
    endcase
    for (int wi = 0; wi < nwin; wi++) begin
      int k;
      longint m;
      k = (md == 2 || md == 3 || md == 4) ? 1 : 9;
      m = fs.add_en ? longint'(add_s) : longint'(cmp_s);
      for (int e = 0; e < k; e++) begin
        longint p;
        in_valid = 1; in_first = (e == 0); in_last = (e == k - 1); in_meta = 16'(id);
        x = data_t'($urandom); kw = data_t'(int'($urandom_range(0, 30)) - 15);
        in_pad = (md == 0 || md == 5) && ($urandom_range(0, 4) == 0);
        p = in_pad ? 0 : (fs.pre_en ? longint'(x) * (fs.pre_kw ? longint'(kw) : longint'(pre_s)) : longint'(x));
        if (fs.add_en) m += p;
        else if (!in_pad && p > m) m = p;
        if (e == k - 1) begin
          exp_t ex;
          if (fs.post_en) m = m * longint'(post_s);
          ex.v = fin(m, int'(shift), int'(clamp_hi)); ex.t = cyc + 3; ex.id = id;
          eq.push_back(ex);
        end
        @(negedge clk);
      end
      id++;
    end
    in_valid = 0;
    repeat (5) @(negedge clk);
  endtask

  initial begin
    in_valid = 0; in_pad = 0; in_first = 0; in_last = 0; in_meta = 0; x = 0; kw = 0;
    pre_s = 0; add_s = 0; cmp_s = 0; post_s = 0; clamp_hi = 0; shift = 0; fs = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int md = 0; md < 6; md++) mode(md, 60);
    checks++;
    if (eq.size() != 0) begin failures++; $display("FAIL missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
