// cmd_fifo: command buffer, a synchronous FIFO of DEPTH entries of type T.
// Used as the engine's CMD buffer and as the FPU's ucmd buffer.
// push is ignored when full, pop when empty; head is the oldest entry
// (valid while !empty). Depth is this design's choice.
module cmd_fifo #(
  parameter type T     = logic [7:0],
  parameter int  DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     din,
  output logic full,
  input  logic pop,
  output T     head,
  output logic empty,
  output logic [$clog2(DEPTH):0] count
);
  localparam int PW = $clog2(DEPTH);
  T mem [DEPTH];
  logic [PW-1:0] wp, rp;

  assign full  = (count == (PW+1)'(DEPTH));
  assign empty = (count == '0);
  assign head  = mem[rp];

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push && !full) wp <= wp + PW'(1);
      if (pop && !empty) rp <= rp + PW'(1);
      count <= count + (PW+1)'(push && !full) - (PW+1)'(pop && !empty);
    end
  end

  // a command must not be pushed into a full buffer
  assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("cmd_fifo: push while full");
endmodule
