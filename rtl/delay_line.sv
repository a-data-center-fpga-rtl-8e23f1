// delay_line: W-bit shift register of D stages (D = 0 is a wire), reset to 0.
// Used to skew the SU row inputs and to align side information with the
// systolic pipeline.
module delay_line #(
  parameter int W = 1,
  parameter int D = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (D == 0) begin : g_wire
    assign q = d;
  end else begin : g_reg
    logic [W-1:0] sr [D];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < D; i++) sr[i] <= '0;
      end else begin
        sr[0] <= d;
        for (int i = 1; i < D; i++) sr[i] <= sr[i-1];
      end
    end
    assign q = sr[D-1];
  end
endmodule
