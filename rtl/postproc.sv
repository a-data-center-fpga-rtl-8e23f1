// postproc: operator fusion at the output of one SU (four cascaded stages,
// each switched on or off by the command):
//   1. add the temporary result of the previous slice read from the OB
//      (slices after the first) or the bias (first slice, if enabled);
//   2. add the branch tensor read from the OB (residual element-wise add);
//   3. relu;
//   4. dynamic-precision quantisation: round-to-nearest arithmetic shift
//      right by `shift`, saturated to 16 bit.
// Stages 2-4 act only on the last slice; earlier slices store the running
// sum, saturated to 32 bit, as the OB's temporary result. Bias and branch
// values are 16-bit numbers in the output format and are shifted left by
// `shift` to line up with the accumulator (this alignment is this design's
// choice). Timing: OB reads issued with the input, write two cycles later.
module postproc
  import cnn_pkg::*;
#(
  parameter int AW = 12
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  acc_t           in_sum [LANES],
  input  logic [AW-1:0]  in_addr,     // OB word address of the result
  input  logic [AW-1:0]  in_br_addr,  // OB word address of the branch value
  input  logic [3:0]     in_f,        // fused kernel group (bias select)
  input  logic           acc_en,
  input  logic           last_slice,
  input  logic           bias_en,
  input  logic           elt_en,
  input  logic           relu_en,
  input  logic [4:0]     shift,
  input  data_t          bias [16][LANES],
  // OB port
  output logic           rd_en,
  output logic [AW-1:0]  rd_addr,
  output logic [AW-1:0]  rd_br_addr,
  input  logic [OBW-1:0] rd_data [LANES],
  input  logic [OBW-1:0] rd_br_data [LANES],
  output logic           wr_en,
  output logic [AW-1:0]  wr_addr,
  output logic [OBW-1:0] wr_data [LANES]
);
  logic          v1;
  acc_t          s1 [LANES];
  logic [AW-1:0] a1;
  logic [3:0]    f1;

  assign rd_en      = in_valid;
  assign rd_addr    = in_addr;
  assign rd_br_addr = in_br_addr;

  function automatic logic [OBW-1:0] sat32(acc_t x);
    if (x > acc_t'(32'sh7fffffff)) return 32'h7fffffff;
    else if (x < -acc_t'(33'sh080000000)) return 32'h80000000;
    else return x[OBW-1:0];
  endfunction

  function automatic acc_t quant(acc_t x, logic [4:0] sh);
    acc_t r;
    r = (sh == 0) ? x : ((x + (acc_t'(1) <<< (sh - 5'd1))) >>> sh);
    if (r > acc_t'(32767)) r = acc_t'(32767);
    else if (r < -acc_t'(32768)) r = -acc_t'(32768);
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; a1 <= '0; f1 <= '0;
      for (int l = 0; l < LANES; l++) s1[l] <= '0;
    end else begin
      v1 <= in_valid;
      a1 <= in_addr;
      f1 <= in_f;
      for (int l = 0; l < LANES; l++) s1[l] <= in_sum[l];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_en <= 1'b0; wr_addr <= '0;
      for (int l = 0; l < LANES; l++) wr_data[l] <= '0;
    end else begin
      wr_en   <= v1;
      wr_addr <= a1;
      for (int l = 0; l < LANES; l++) begin
        acc_t t;
        // stage 1: temporary result of the previous slice, or bias
        if (acc_en) t = s1[l] + acc_t'($signed(rd_data[l]));
        else if (bias_en) t = s1[l] + (acc_t'(bias[f1][l]) <<< shift);
        else t = s1[l];
        if (last_slice) begin
          // stage 2: branch tensor
          if (elt_en) t = t + (acc_t'($signed(rd_br_data[l][DATA_W-1:0])) <<< shift);
          // stage 3: relu
          if (relu_en && t < 0) t = '0;
          // stage 4: quantisation
          t = quant(t, shift);
        end
        wr_data[l] <= sat32(t);
      end
    end
  end
endmodule
