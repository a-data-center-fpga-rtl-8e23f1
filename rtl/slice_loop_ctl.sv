// slice_loop_ctl: slice-loop controller between the command decoder and the
// SU datapath. One conv command covers all ceil(Cin/m) input slices: for
// slice s it waits until the slice's weights are in the EPE caches, starts
// the IB dispatcher at base + s*H*W and the four broadcast caches, waits
// until all windows are issued, lets the SU and fusion pipeline drain
// (DRAIN cycles), then moves to the next slice by itself. The flags it
// drives tell the fusion stage to add the previous slice's temporary
// result (s > 0) and to finish the output (last slice); cache = s mod 2
// selects the weight cache.
// Interface: start (one cycle, with cmd valid) / done (one cycle).
module slice_loop_ctl
  import cnn_pkg::*;
#(
  parameter int NBC   = NUM_SU,
  parameter int DRAIN = 40
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  conv_cmd_t     cmd,
  output logic          busy,
  output logic          done,
  input  logic [5:0]    loaded,
  output logic [5:0]    slices_done,
  output logic          bc_start,
  input  logic [NBC-1:0] bc_busy,
  output logic          disp_start,
  output logic [15:0]   disp_base,
  input  logic          disp_busy,
  output logic          acc_en,
  output logic          last_slice,
  output logic          cache
);
  typedef enum logic [1:0] {IDLE, WAITW, RUN, DRAINING} st_e;
  st_e st;
  conv_cmd_t c;
  logic [4:0] s;
  logic [7:0] cnt;

  assign busy       = (st != IDLE);
  assign acc_en     = (s != 0);
  assign last_slice = (s == c.slices - 5'd1);
  assign cache      = s[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; c <= '0; s <= '0; cnt <= '0; slices_done <= '0;
      bc_start <= 1'b0; disp_start <= 1'b0; disp_base <= '0; done <= 1'b0;
    end else begin
      bc_start <= 1'b0; disp_start <= 1'b0; done <= 1'b0;
      case (st)
        IDLE: if (start) begin
          c <= cmd; s <= '0; slices_done <= '0; st <= WAITW;
        end
        WAITW: if (loaded > 6'(s)) begin
          bc_start   <= 1'b1;
          disp_start <= 1'b1;
          disp_base  <= c.ib_base + 16'(s) * 16'(c.h) * 16'(c.w);
          st <= RUN; cnt <= 8'd2;
        end
        RUN: begin
          // cnt covers the cycles until the start pulses are seen
          if (cnt != 0) cnt <= cnt - 8'd1;
          else if (!disp_busy && bc_busy == '0) begin
            st <= DRAINING; cnt <= 8'(DRAIN);
          end
        end
        DRAINING: begin
          if (cnt != 0) cnt <= cnt - 8'd1;
          else begin
            slices_done <= 6'(s) + 6'd1;
            if (last_slice) begin
              st <= IDLE; done <= 1'b1;
            end else begin
              s <= s + 5'd1; st <= WAITW;
            end
          end
        end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
