// fp_recip_lut: 28-bit floating-point reciprocal by table look-up.
//
// Computes y ~ 1/a; in the SPH pair pipeline it turns the mean smoothing
// length h_ij into 1/h_ij. For a = 2^e * 1.m the result is
// 2^(-e-1) * (2 / 1.m), where 2/1.m lies in (1, 2]. The mantissa of 2/1.m is
// read from a table addressed by the LUT_BITS leading bits of m; each entry
// holds the value at the midpoint of its interval, so the relative error is
// below 2^-(LUT_BITS+1). The exponent is computed, not looked up.
//
// The paper names the unit ("reciprocal with LUT") but gives neither the
// table size nor its contents; LUT_BITS = 10 (1024 entries of 20 bits) and
// the midpoint rule are this design's choices. The table is computed at
// elaboration: entry k = floor(2^(LUT_BITS+22) / (2^(LUT_BITS+1) + 2k + 1)),
// less the hidden one.
//
// Stage 1 registers the table address and the result exponent, stage 2 reads
// the table. Latency LAT_LUT = 2 clocks, one operation per clock, no reset.
// 1/0 saturates to the largest magnitude; results below the smallest normal
// number flush to zero.
module fp_recip_lut
  import aha_pkg::*;
#(
  parameter int LUT_BITS = 10
) (
  input  logic clk,
  input  f28_t a,
  output f28_t y
);

  localparam int N = 1 << LUT_BITS;

  function automatic logic [MAN_W-1:0] entry(int k);
    logic [63:0] d, q;
    d = (64'd1 << (LUT_BITS + 1)) + 64'(2 * k + 1);
    q = (64'd1 << (LUT_BITS + 2 + MAN_W)) / d;
    return q[MAN_W-1:0];
  endfunction

  logic [MAN_W-1:0] rom [N];
  for (genvar k = 0; k < N; k++) begin : g_rom
    localparam logic [MAN_W-1:0] V = entry(k);
    assign rom[k] = V;
  end

  logic [LUT_BITS-1:0] idx_q;
  logic signed [8:0]   e_q;
  logic                sign_q, zero_q;

  always_ff @(posedge clk) begin
    idx_q  <= a.man[MAN_W-1 -: LUT_BITS];
    e_q    <= 9'sd125 - $signed({2'b00, a.exp});   // -(exp-63) - 1 + 63
    sign_q <= a.sign;
    zero_q <= (a.exp == '0);
  end

  always_ff @(posedge clk) begin
    if (zero_q)         y <= f28_sat(sign_q);
    else if (e_q < 9'sd1) y <= F28_ZERO;
    else                y <= '{sign: sign_q, exp: e_q[EXP_W-1:0], man: rom[idx_q]};
  end

endmodule
