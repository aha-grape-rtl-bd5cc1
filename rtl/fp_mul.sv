// fp_mul: pipelined 28-bit floating-point multiplier.
//
// Computes y = a * b. In the SPH pair pipeline it forms X = r_ij * (1/h_ij),
// m_j * W(X) and m_j W(X) * (1/h_ij^3).
//
// Stage 1 multiplies the 21-bit mantissas (hidden one included) and adds the
// exponents; stage 2 normalises by at most one bit, truncates to 20 mantissa
// bits and handles zero, underflow (flush to zero) and overflow (saturate).
// Latency LAT_MUL = 2 clocks, one operation per clock, no reset.
module fp_mul
  import aha_pkg::*;
(
  input  logic clk,
  input  f28_t a,
  input  f28_t b,
  output f28_t y
);

  f28_mulpart_t p_q;

  always_ff @(posedge clk) begin
    p_q <= f28_mul_s1(a, b);
    y   <= f28_mul_s2(p_q);
  end

endmodule
