// fp_uadd: pipelined 28-bit floating-point adder for non-negative operands
// ("unsigned add").
//
// Computes y = |a| + |b|. It sums the squared coordinate differences,
// dx^2 + dz^2 and then + dy^2, whose operands are never negative. Without
// cancellation the result needs at most a one-bit renormalising shift, which
// makes this unit smaller than fp_addsub.
//
// Two register stages: alignment, then add and normalise. Latency LAT_ADD = 2
// clocks, one operation per clock, no reset. Sign bits of the inputs are
// ignored and the result is always positive (this design's choice).
module fp_uadd
  import aha_pkg::*;
(
  input  logic clk,
  input  f28_t a,
  input  f28_t b,
  output f28_t y
);

  f28_t a_q, b_q;

  // Stage 1 registers the magnitudes; stage 2 aligns, adds and renormalises.
  always_ff @(posedge clk) begin
    a_q <= '{sign: 1'b0, exp: a.exp, man: a.man};
    b_q <= '{sign: 1'b0, exp: b.exp, man: b.man};
    y   <= f28_uadd(a_q, b_q);
  end

endmodule
