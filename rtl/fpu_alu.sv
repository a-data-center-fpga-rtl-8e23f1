// fpu_alu: one SIMD lane of the filter processing unit's worker part.
// A cascade of three units, each enabled or bypassed by the FuncSet of the
// micro-command: pre-multiplier (by a scalar or, for depthwise convolution,
// by the lane's kernel weight), mid adder / comparator working over the
// window (the register is reset to add_s / cmp_s at the first element and its
// value is released at the window-end element), and final multiplier (e.g.
// the 1/(k*k) of average pooling). The final value is shifted right with
// rounding and clamped to [-32768, clamp_hi] (relu6 uses clamp_hi).
// Max-pool: comparator only; avg-pool: adder + final multiplier; relu:
// comparator with cmp_s = 0 and a 1-element window; linear: pre-mult + add.
// Padding elements are ignored by the comparator and count as 0 otherwise.
// Timing: three pipeline stages, one element per cycle, output valid three
// cycles after the window-end element.
module fpu_alu
  import cnn_pkg::*;
#(
  parameter int MW = 16    // width of the side information carried along
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  data_t         x,
  input  data_t         kw,
  input  logic          in_pad,
  input  logic          in_first,
  input  logic          in_last,
  input  logic [MW-1:0] in_meta,
  input  funcset_t      fs,
  input  data_t         pre_s,
  input  data_t         add_s,
  input  data_t         cmp_s,
  input  data_t         post_s,
  input  logic [4:0]    shift,
  input  data_t         clamp_hi,
  output logic          out_valid,
  output data_t         y,
  output logic [MW-1:0] out_meta
);
  typedef logic signed [39:0] wide_t;

  // stage 1: pre-multiplier
  logic          v1, pad1, first1, last1;
  logic [MW-1:0] m1;
  wide_t         p1;
  // stage 2: mid adder / comparator
  logic          v2;
  logic [MW-1:0] m2;
  wide_t         r2, mid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; pad1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0; m1 <= '0; p1 <= '0;
    end else begin
      v1 <= in_valid; pad1 <= in_pad; first1 <= in_first; last1 <= in_last; m1 <= in_meta;
      if (in_pad) p1 <= '0;
      else if (fs.pre_en) p1 <= wide_t'(x) * wide_t'(fs.pre_kw ? kw : pre_s);
      else p1 <= wide_t'(x);
    end
  end

  wide_t base, nxt;
  always_comb begin
    base = first1 ? (fs.add_en ? wide_t'(add_s) : wide_t'(cmp_s)) : mid;
    if (fs.add_en) nxt = base + p1;
    else if (fs.cmp_en) nxt = (!pad1 && p1 > base) ? p1 : base;
    else nxt = p1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mid <= '0; v2 <= 1'b0; r2 <= '0; m2 <= '0;
    end else begin
      if (v1) mid <= nxt;
      v2 <= v1 && last1;
      if (v1 && last1) begin
        r2 <= nxt;
        m2 <= m1;
      end
    end
  end

  // stage 3: final multiplier, rounding shift, clamp
  logic signed [63:0] q, qs;
  always_comb begin
    q  = fs.post_en ? 64'(r2) * 64'(post_s) : 64'(r2);
    qs = (shift == 0) ? q : ((q + (64'sd1 <<< (shift - 5'd1))) >>> shift);
    if (qs > 64'(clamp_hi)) qs = 64'(clamp_hi);
    else if (qs < -64'sd32768) qs = -64'sd32768;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; y <= '0; out_meta <= '0;
    end else begin
      out_valid <= v2;
      if (v2) begin
        y <= data_t'(qs[15:0]);
        out_meta <= m2;
      end
    end
  end
endmodule
