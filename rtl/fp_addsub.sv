// fp_addsub: pipelined 28-bit floating-point adder/subtractor ("signed add").
//
// Computes y = a + b, or y = a - b when sub is set, for operands of either
// sign. It forms the coordinate differences x_i - x_j, y_i - y_j, z_i - z_j
// and the smoothing-length sum h_i + h_j of the SPH pair pipeline.
//
// Two register stages: the first orders the operands by magnitude and aligns
// the smaller mantissa (3 guard bits); the second adds or subtracts and
// renormalises. Latency is LAT_ADD = 2 clocks, one new operation per clock,
// no stall and no reset (the data path holds no state that needs one).
// The two-stage split, truncating rounding and saturation on overflow are
// this design's choices; the format itself (1/7/20 bits) is the paper's.
module fp_addsub
  import aha_pkg::*;
(
  input  logic clk,
  input  f28_t a,
  input  f28_t b,
  input  logic sub,
  output f28_t y
);

  f28_aligned_t al_q;

  always_ff @(posedge clk) begin
    al_q <= f28_align(a, sub ? f28_neg(b) : b);
    y    <= f28_addnorm(al_q);
  end

endmodule
