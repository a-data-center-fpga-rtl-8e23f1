// ib_dispatcher: streams one input-tile slice out of the IB and broadcasts
// every word to all broadcast cache sets at once. Pixels go in raster order
// (y, x) from address base + y*w + x. Row y is sent only when every BC has
// room for it (y < free_row + ROWS for each BC); a row that is allowed stays
// allowed, so a read once issued is always delivered one cycle later.
// Interface: start/done pulse; IB read port; broadcast write bus.
module ib_dispatcher
  import cnn_pkg::*;
#(
  parameter int NBC   = NUM_SU,
  parameter int ROWS  = 8,
  parameter int AW    = 12
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] base,
  input  logic [7:0]    h,
  input  logic [7:0]    w,
  output logic          busy,
  output logic          done,
  input  logic [8:0]    free_row [NBC],
  output logic          ib_rd_en,
  output logic [AW-1:0] ib_rd_addr,
  input  word_t         ib_rd_data,
  output logic          bc_wr_valid,
  output logic [7:0]    bc_wr_y,
  output logic [7:0]    bc_wr_x,
  output word_t         bc_wr_data
);
  logic [7:0]    y, x, hh, ww;
  logic [AW-1:0] addr;
  logic          run, room;
  logic          pend;
  logic [7:0]    pend_y, pend_x;

  always_comb begin
    room = 1'b1;
    for (int i = 0; i < NBC; i++)
      if (10'(y) >= 10'(free_row[i]) + 10'(ROWS)) room = 1'b0;
  end

  assign ib_rd_en   = run && room;
  assign ib_rd_addr = addr;
  assign busy       = run || pend;
  assign bc_wr_valid = pend;
  assign bc_wr_y    = pend_y;
  assign bc_wr_x    = pend_x;
  assign bc_wr_data = ib_rd_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; pend <= 1'b0; done <= 1'b0;
      y <= '0; x <= '0; hh <= '0; ww <= '0; addr <= '0;
      pend_y <= '0; pend_x <= '0;
    end else begin
      done <= pend && !run;
      pend <= ib_rd_en;
      if (ib_rd_en) begin
        pend_y <= y;
        pend_x <= x;
      end
      if (start) begin
        run <= 1'b1;
        y <= '0; x <= '0; hh <= h; ww <= w; addr <= base;
      end else if (ib_rd_en) begin
        addr <= addr + AW'(1);
        if (x != ww - 8'd1) x <= x + 8'd1;
        else begin
          x <= '0;
          if (y != hh - 8'd1) y <= y + 8'd1;
          else run <= 1'b0;
        end
      end
    end
  end
endmodule
