// delay_line: DEPTH-stage shift register for any packed type.
//
// Balances the SPH pair pipeline: values that skip a unit (for example
// 1/h_ij, waiting for r_ij) wait here so that every operand of a unit
// belongs to the same pair. out is in delayed by DEPTH clocks; DEPTH = 0 is a
// plain wire. All stages clear to zero on reset so that valid and framing
// bits start idle. A helper of this design, not a unit named in the paper.
module delay_line #(
  parameter type T     = logic [7:0],
  parameter int  DEPTH = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  T     in,
  output T     out
);

  if (DEPTH == 0) begin : g_wire
    assign out = in;
  end else begin : g_regs
    T stage [DEPTH];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < DEPTH; i++) stage[i] <= '0;
      end else begin
        stage[0] <= in;
        for (int i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
      end
    end
    assign out = stage[DEPTH-1];
  end

endmodule
