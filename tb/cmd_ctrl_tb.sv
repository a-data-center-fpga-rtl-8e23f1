// cmd_ctrl_tb: exhaustive check of the command decoder's issue rule over
// every opcode, sync bit and combination of unit states: a command issues
// (pop plus exactly the right start/push) only when its unit is free, the
// FPU and the assemble reader exclude each other, and a sync command waits
// for all units. Also checks that the payload reaches the unit unchanged
// and the idle flag.
module cmd_ctrl_tb;
  import cnn_pkg::*;
  logic head_valid, pop, conv_busy, fpu_busy, fpu_full, asm_busy, conv_start, fpu_push, asm_start, idle;
  cmd_t head;
  conv_cmd_t conv_cmd;
  fpu_cmd_t fpu_cmd;
  asm_cmd_t asm_cmd;
  cmd_ctrl dut (.*);
  int checks = 0, failures = 0;
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < 256; i++) begin
      logic ok, allidle;
      {head_valid, conv_busy, fpu_busy, fpu_full, asm_busy, head.sync} = 6'(i);
      head.op = cmd_op_e'(i >> 6);
      head.payload = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      #1;
      allidle = !conv_busy && !fpu_busy && !asm_busy;
      ok = head_valid && (!head.sync || allidle);
      case (head.op)
        CMD_CONV: ok = ok && !conv_busy;
        CMD_FPU:  ok = ok && !fpu_full && !asm_busy;
        CMD_ASM:  ok = ok && !asm_busy && !fpu_busy;
        default:  ;
      endcase
      checks++;
      if (pop != ok || conv_start != (ok && head.op == CMD_CONV) || fpu_push != (ok && head.op == CMD_FPU)
          || asm_start != (ok && head.op == CMD_ASM) || idle != (allidle && !head_valid)) begin
        failures++; $display("FAIL case %0d", i);
      end
      checks++;
      if (conv_cmd != head.payload[$bits(conv_cmd_t)-1:0] || fpu_cmd != head.payload[$bits(fpu_cmd_t)-1:0]
          || asm_cmd != head.payload[$bits(asm_cmd_t)-1:0]) begin
        failures++; $display("FAIL payload %0d", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
