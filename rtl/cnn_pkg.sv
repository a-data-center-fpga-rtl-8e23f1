// cnn_pkg: constants, command formats and helper functions shared by the
// CNN engine. Data are 16-bit fixed point (the paper's Fix16). An SU has
// M_ROWS = 32 EPE rows (input channels of one slice) and N_COLS = 16 EPE
// columns; each column yields two kernel groups, so one slice produces
// 2n = 32 output channels per window (paper: n = 16, m = 32). Four SUs form
// an engine. Accumulator width 48 follows the DSP48 cascade; the command
// layouts below are this design's own, the paper gives none.
package cnn_pkg;
  localparam int DATA_W   = 16;   // Fix16
  localparam int ACC_W    = 48;   // DSP48 P-cascade width
  localparam int OBW      = 32;   // OB word: temporary sums saturated to 32 bit
  localparam int M_ROWS   = 32;   // m
  localparam int N_COLS   = 16;   // n
  localparam int LANES    = 2 * N_COLS; // 2n output channels / SIMD lanes
  localparam int NUM_SU   = 4;
  localparam int WBUF_D   = 16;   // weight buffer depth
  localparam int WORD_W   = M_ROWS * DATA_W; // 512-bit IB word

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [WORD_W-1:0]        word_t;

  typedef enum logic [1:0] {CMD_CONV = 2'd0, CMD_FPU = 2'd1, CMD_ASM = 2'd2, CMD_NOP = 2'd3} cmd_op_e;

  // Convolution command (one output group set, all Cin slices).
  typedef struct packed {
    logic [15:0] ib_base;    // IB word address of slice 0, pixel (0,0)
    logic [7:0]  h;          // input tile height
    logic [7:0]  w;          // input tile width
    logic [4:0]  slices;     // number of Cin slices of m channels (>=1)
    logic [2:0]  kx;         // kernel width  (1..7)
    logic [2:0]  ky;         // kernel height (1..7)
    logic [2:0]  stride;     // 1..4
    logic [1:0]  pad;        // zero padding 0..3
    logic [4:0]  fu;         // kernel fusion count Fu (1..16), Fu*kx*ky <= 16
    logic        ob_bank;    // OB ping-pong bank written
    logic [11:0] ob_base;    // OB word base of the output tensor
    logic        bias_en;    // first kernel words are bias
    logic        elt_en;     // add branch tensor
    logic [11:0] br_base;    // OB base of the branch tensor (same bank, same shape)
    logic        relu_en;
    logic [4:0]  shift;      // dynamic-precision quantisation shift
  } conv_cmd_t;

  // FPU function settings (FuncSet) and parameters.
  typedef struct packed {
    logic        pre_en;     // pre-multiplier enabled
    logic        pre_kw;     // pre-multiplier takes the per-lane kernel weight (depthwise)
    logic        add_en;     // mid adder accumulates over the window
    logic        cmp_en;     // mid comparator keeps the maximum over the window
    logic        post_en;    // final multiplier enabled
  } funcset_t;

  typedef struct packed {
    funcset_t    fs;
    logic        src_bank;
    logic [11:0] src_base;
    logic        dst_bank;
    logic [11:0] dst_base;
    logic [7:0]  h;          // source feature map height
    logic [7:0]  w;          // source feature map width
    logic [4:0]  groups;     // channel groups of 2n (ChannelNum / 32)
    logic [2:0]  kx;
    logic [2:0]  ky;
    logic [2:0]  stride;
    logic [1:0]  pad;
    logic signed [15:0] pre_s;   // pre-multiplier scalar
    logic signed [15:0] add_s;   // adder start value (bias)
    logic signed [15:0] cmp_s;   // comparator reset value
    logic signed [15:0] post_s;  // final multiplier scalar
    logic [4:0]  shift;          // output shift after the final multiplier
    logic signed [15:0] clamp_hi;// output upper clamp (relu6)
  } fpu_cmd_t;

  typedef struct packed {
    logic        ob_bank;
    logic [11:0] ob_base;
    logic [7:0]  h;          // output tensor height
    logic [7:0]  w;          // output tensor width
    logic [4:0]  groups;     // channel groups of 32
    logic [15:0] ib_base;    // destination in IB
  } asm_cmd_t;

  localparam int PAYLOAD_W = ($bits(fpu_cmd_t) > $bits(conv_cmd_t)) ? $bits(fpu_cmd_t) : $bits(conv_cmd_t);

  typedef struct packed {
    cmd_op_e                op;
    logic                   sync;  // wait until every unit is idle before issuing
    logic [PAYLOAD_W-1:0]   payload;
  } cmd_t;

  // Output size of a sliding-window operation.
  function automatic logic [7:0] out_dim(logic [7:0] in, logic [2:0] k, logic [2:0] s, logic [1:0] p);
    logic [9:0] t;
    t = 10'(in) + 10'(2 * p) - 10'(k);
    return 8'(t / 10'(s) + 1);
  endfunction

  // Windows of one output row that fall to one SU (x interleaved over 4 SUs).
  function automatic logic [7:0] per_su(logic [7:0] ow);
    return 8'((ow + 8'd3) >> 2);
  endfunction

  // OB location of pixel (y,x), channel group g of a tensor of size h x w at base.
  // The set is x mod 4 (the SU that computed it); the word address inside the set
  // is base + g*h*ceil(w/4) + y*ceil(w/4) + x/4.
  function automatic logic [11:0] ob_addr(logic [11:0] base, logic [7:0] h, logic [7:0] w,
                                          logic [4:0] g, logic [7:0] y, logic [7:0] x);
    logic [15:0] q;
    q = 16'(per_su(w));
    return 12'(16'(base) + 16'(g) * 16'(h) * q + 16'(y) * q + 16'(x >> 2));
  endfunction
endpackage
