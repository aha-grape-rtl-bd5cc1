// fp_sqrt_lut: 28-bit floating-point square root by table look-up.
//
// Computes y ~ sqrt(|a|); in the SPH pair pipeline it turns the squared
// distance into the distance r_ij. For a = 2^e * 1.m with e even the root is
// 2^(e/2) * sqrt(1.m); with e odd it is 2^((e-1)/2) * sqrt(2 * 1.m). Both
// mantissa roots lie in [1, 2) and come from one table addressed by the
// parity of e and the LUT_BITS leading bits of m. Entries hold the root at
// the midpoint of each interval (relative error below 2^-(LUT_BITS+2)).
// The exponent is halved by an arithmetic shift.
//
// The paper names the unit ("root with LUT") without table size or
// contents; LUT_BITS = 10 (2 x 1024 entries of 20 bits) is this design's
// choice. The table is computed at elaboration with an integer square root:
// entry (p, k) = isqrt((2^(LUT_BITS+1) + 2k + 1) * 2^(40 - LUT_BITS - 1 + p)),
// less the hidden one.
//
// Stage 1 registers the address and the exponent, stage 2 reads the table.
// Latency LAT_LUT = 2 clocks, one operation per clock, no reset. sqrt(0) = 0.
// The sign of a is ignored and the sign bit of y is always 0.
module fp_sqrt_lut
  import aha_pkg::*;
#(
  parameter int LUT_BITS = 10
) (
  input  logic clk,
  input  f28_t a,
  output f28_t y
);

  localparam int N = 2 << LUT_BITS;

  // Index bit LUT_BITS set: odd unbiased exponent.
  function automatic logic [MAN_W-1:0] entry(int k);
    logic [63:0] d, r;
    int kk;
    kk = k % (1 << LUT_BITS);
    d = (64'd1 << (LUT_BITS + 1)) + 64'(2 * kk + 1);
    d = d << (2 * MAN_W - (LUT_BITS + 1));
    if (k >= (1 << LUT_BITS)) d = d << 1;
    r = isqrt64(d);
    return r[MAN_W-1:0];
  endfunction

  logic [MAN_W-1:0] rom [N];
  for (genvar k = 0; k < N; k++) begin : g_rom
    localparam logic [MAN_W-1:0] V = entry(k);
    assign rom[k] = V;
  end

  logic [LUT_BITS:0]  idx_q;
  logic signed [8:0]  ue;      // unbiased exponent of a
  logic [EXP_W-1:0]   e_q;
  logic               zero_q;

  assign ue = $signed({2'b00, a.exp}) - 9'sd63;

  always_ff @(posedge clk) begin
    idx_q  <= {ue[0], a.man[MAN_W-1 -: LUT_BITS]};
    e_q    <= 7'((ue >>> 1) + 9'sd63);
    zero_q <= (a.exp == '0);
  end

  always_ff @(posedge clk) begin
    if (zero_q) y <= F28_ZERO;
    else        y <= '{sign: 1'b0, exp: e_q, man: rom[idx_q]};
  end

endmodule
