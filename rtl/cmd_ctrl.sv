// cmd_ctrl: command decoder and controller of one engine. It takes the
// command at the head of the CMD buffer, decodes its opcode and hands it to
// its unit: CONV to the slice-loop controller and the kernel load controller
// (both started together), FPU to the FPU's ucmd buffer, ASM to the assemble
// reader. Commands issue in order; a command waits until its unit is free.
// The FPU and the assemble reader share OB port B, so each waits for the
// other to be idle. Convolution and FPU work can overlap (on different OB
// banks); a command with `sync` set waits until all units are idle, which
// is how a dependency is expressed. The opcode set and the sync rule are
// this design's own; the paper only names the block.
module cmd_ctrl
  import cnn_pkg::*;
(
  input  logic      head_valid,
  input  cmd_t      head,
  output logic      pop,
  input  logic      conv_busy,
  input  logic      fpu_busy,
  input  logic      fpu_full,
  input  logic      asm_busy,
  output logic      conv_start,
  output conv_cmd_t conv_cmd,
  output logic      fpu_push,
  output fpu_cmd_t  fpu_cmd,
  output logic      asm_start,
  output asm_cmd_t  asm_cmd,
  output logic      idle
);
  logic all_idle, ok;
  assign all_idle = !conv_busy && !fpu_busy && !asm_busy;
  assign idle     = all_idle && !head_valid;

  assign conv_cmd = conv_cmd_t'(head.payload[$bits(conv_cmd_t)-1:0]);
  assign fpu_cmd  = fpu_cmd_t'(head.payload[$bits(fpu_cmd_t)-1:0]);
  assign asm_cmd  = asm_cmd_t'(head.payload[$bits(asm_cmd_t)-1:0]);

  always_comb begin
    ok = 1'b0;
    if (head_valid && (!head.sync || all_idle)) begin
      unique case (head.op)
        CMD_CONV: ok = !conv_busy;
        CMD_FPU:  ok = !fpu_full && !asm_busy;
        CMD_ASM:  ok = !asm_busy && !fpu_busy;
        default:  ok = 1'b1;   // NOP
      endcase
    end
  end

  assign pop        = ok;
  assign conv_start = ok && head.op == CMD_CONV;
  assign fpu_push   = ok && head.op == CMD_FPU;
  assign asm_start  = ok && head.op == CMD_ASM;
endmodule
