// fp_square: pipelined 28-bit floating-point square ("computed square").
//
// Computes y = a * a, always positive. It forms dx^2, dy^2 and dz^2 of the
// SPH pair pipeline. The mantissa is squared by a multiplier (the paper's
// "computed" square, as opposed to a table); the exponent is doubled less
// the bias. Stage 1 forms the 42-bit mantissa square and the exponent,
// stage 2 normalises and truncates. Latency LAT_MUL = 2 clocks, one operation
// per clock, no reset.
module fp_square
  import aha_pkg::*;
(
  input  logic clk,
  input  f28_t a,
  output f28_t y
);

  f28_mulpart_t p_q;
  f28_t         m;

  always_comb begin
    m      = a;
    m.sign = 1'b0;
  end

  always_ff @(posedge clk) begin
    p_q <= f28_mul_s1(m, m);
    y   <= f28_mul_s2(p_q);
  end

endmodule
