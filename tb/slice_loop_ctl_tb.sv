// slice_loop_ctl_tb: runs a 3-slice conv command against simple models of
// the kernel loader (weights of slice s ready a while after slice s-2 is
// done), the dispatcher and the BCs (busy for a random time after start).
// Checks per slice: start pulses only once the weights are loaded, the
// dispatcher base ib_base + s*h*w, acc_en/last_slice/cache flags, the
// drain time before slices_done advances, and one done pulse at the end.
module slice_loop_ctl_tb;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, bc_start, disp_start, disp_busy, acc_en, last_slice, cache;
  conv_cmd_t cmd;
  logic [5:0] loaded, slices_done;
  logic [3:0] bc_busy;
  logic [15:0] disp_base;
  slice_loop_ctl #(.DRAIN(10)) dut (.*);
  int checks = 0, failures = 0, ns = 0, dones = 0, busy_cnt = 0, last_end = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // unit models
  always @(posedge clk) begin
    if (bc_start) busy_cnt <= int'($urandom_range(5, 30));
    else if (busy_cnt != 0) busy_cnt <= busy_cnt - 1;
    if (busy_cnt == 1) last_end <= cyc;
  end
  assign bc_busy   = {3'b0, busy_cnt != 0};
  assign disp_busy = busy_cnt > 2;
  always @(posedge clk) if (!rst_n) loaded <= 0;
    else if (loaded < 3 && int'(loaded) < int'(slices_done) + 2 && $urandom_range(0, 20) == 0) loaded <= loaded + 1;

  always @(negedge clk) if (rst_n) begin
    if (done) dones++;
    if (bc_start) begin
      checks++;
      if (!disp_start || disp_base != 16'(200 + ns*6*7) || int'(loaded) <= ns
          || acc_en != (ns != 0) || last_slice != (ns == 2) || cache != ns[0]) begin
        failures++; $display("FAIL slice %0d start: base %0d loaded %0d flags %b%b%b", ns, disp_base, loaded, acc_en, last_slice, cache);
      end
      checks++;
      if (int'(slices_done) != ns) begin failures++; $display("FAIL slices_done %0d at slice %0d", slices_done, ns); end
      ns++;
    end
  end

  initial begin
    start = 0; cmd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    cmd.ib_base = 200; cmd.h = 6; cmd.w = 7; cmd.slices = 3;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait (done);
    checks++;
    if (cyc - last_end < 10) begin failures++; $display("FAIL no drain: %0d", cyc - last_end); end
    repeat (5) @(negedge clk);
    checks += 3;
    if (ns != 3) begin failures++; $display("FAIL %0d slices", ns); end
    if (dones != 1) begin failures++; $display("FAIL %0d done pulses", dones); end
    if (busy || slices_done != 3) begin failures++; $display("FAIL end state"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
