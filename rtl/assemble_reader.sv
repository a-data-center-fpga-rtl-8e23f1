// assemble_reader: after a convolution, collects the output tensor that is
// spread over the four OB sets (pixel x of a row sits in set x mod 4, see
// cnn_pkg::ob_addr), puts the pixels back in raster order and writes them to
// the IB as the next layer's input: IB address ib_base + g*H*W + y*W + x,
// one 512-bit word (32 channels, the low 16 bits of each OB lane) per cycle.
// Interface: start/done; OB read request (set, bank, address) with data one
// cycle later; IB write port.
module assemble_reader
  import cnn_pkg::*;
#(
  parameter int AW  = 12,
  parameter int IAW = 12
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  asm_cmd_t       cmd,
  output logic           busy,
  output logic           done,
  output logic           ob_rd_en,
  output logic           ob_rd_bank,
  output logic [1:0]     ob_rd_set,
  output logic [AW-1:0]  ob_rd_addr,
  input  logic [OBW-1:0] ob_rd_data [LANES],
  output logic           ib_wr_en,
  output logic [IAW-1:0] ib_wr_addr,
  output word_t          ib_wr_data
);
  asm_cmd_t c;
  logic run, pend;
  logic [4:0] g;
  logic [7:0] y, x;
  logic [IAW-1:0] dst, pend_dst;

  assign busy       = run || pend;
  assign ob_rd_en   = run;
  assign ob_rd_bank = c.ob_bank;
  assign ob_rd_set  = x[1:0];
  assign ob_rd_addr = AW'(ob_addr(c.ob_base, c.h, c.w, g, y, x));

  always_comb begin
    for (int l = 0; l < LANES; l++) ib_wr_data[l*DATA_W +: DATA_W] = ob_rd_data[l][DATA_W-1:0];
  end
  assign ib_wr_en   = pend;
  assign ib_wr_addr = pend_dst;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c <= '0; run <= 1'b0; pend <= 1'b0; done <= 1'b0;
      g <= '0; y <= '0; x <= '0; dst <= '0; pend_dst <= '0;
    end else begin
      pend <= run;
      pend_dst <= dst;
      done <= pend && !run;
      if (start) begin
        c <= cmd; run <= 1'b1; g <= '0; y <= '0; x <= '0; dst <= IAW'(cmd.ib_base);
      end else if (run) begin
        dst <= dst + IAW'(1);
        if (x != c.w - 8'd1) x <= x + 8'd1;
        else begin
          x <= '0;
          if (y != c.h - 8'd1) y <= y + 8'd1;
          else begin
            y <= '0;
            if (g != c.groups - 5'd1) g <= g + 5'd1;
            else run <= 1'b0;
          end
        end
      end
    end
  end
endmodule
