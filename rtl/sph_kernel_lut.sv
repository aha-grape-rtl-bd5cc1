// sph_kernel_lut: SPH smoothing kernel W(X) by table look-up.
//
// Takes the scaled distance X = r_ij / h_ij and returns the dimensionless
// kernel value W(X); the caller scales it by 1/h_ij^3. The table holds the
// cubic-spline kernel of Monaghan & Lattanzio in three dimensions:
//   W(q) = (1/pi) * (1 - 1.5 q^2 + 0.75 q^3)   for 0 <= q < 1
//   W(q) = (1/pi) * 0.25 * (2 - q)^3           for 1 <= q < 2
//   W(q) = 0                                   for q >= 2
// The paper says only that W is a table look-up; the choice of this kernel,
// of 2^KER_BITS entries spaced 2^(1-KER_BITS) apart on [0, 2) and of
// midpoint sampling is this design's. Entry k is computed at elaboration in
// exact integers: with S = 2^KER_BITS and Q = 2k + 1 (q = Q/S),
//   pi * W * 4 S^3 = 4 S^3 - 6 Q^2 S + 3 Q^3   (Q < S)
//                  = (2S - Q)^3                (Q >= S)
// scaled by round(2^32 / pi) and converted to the 28-bit format.
//
// Stage 1 converts X to the table address (a right shift of the mantissa by
// an amount set by the exponent) and flags X >= 2; stage 2 reads the table.
// The paper spreads W(X) over two FPGAs; here they are the two stages.
// Latency LAT_KER = 2 clocks, one look-up per clock, no reset. The sign of X
// is ignored.
module sph_kernel_lut
  import aha_pkg::*;
#(
  parameter int KER_BITS = 10
) (
  input  logic clk,
  input  f28_t x,
  output f28_t w,
  output logic cutoff    // X >= 2: W = 0 (registered with w)
);

  localparam int N = 1 << KER_BITS;
  localparam logic [127:0] INV_PI_32 = 128'd1367130551;  // round(2^32 / pi)

  function automatic f28_t entry(int k);
    logic [127:0] s, q, n;
    s = 128'd1 << KER_BITS;
    q = 128'(2 * k + 1);
    if (q < s) n = 4 * s * s * s - 6 * q * q * s + 3 * q * q * q;
    else       n = (2 * s - q) * (2 * s - q) * (2 * s - q);
    return fix_to_f28(n * INV_PI_32, 3 * KER_BITS + 2 + 32);
  endfunction

  f28_t rom [N];
  for (genvar k = 0; k < N; k++) begin : g_rom
    localparam f28_t V = entry(k);
    assign rom[k] = V;
  end

  // Address: floor(X * 2^(KER_BITS-1)) = {1, man} >> sh,
  // sh = MAN_W + BIAS - (KER_BITS - 1) - exp.
  logic signed [9:0]   sh;
  logic [MAN_W:0]      mfull;
  logic [KER_BITS-1:0] idx_d, idx_q;
  logic                out_d, out_q;

  always_comb begin
    sh    = 10'(MAN_W + BIAS - (KER_BITS - 1)) - $signed({3'b0, x.exp});
    mfull = {1'b1, x.man};
    out_d = (x.exp >= 7'(BIAS + 1));
    if (x.exp == '0 || sh > 10'(MAN_W)) idx_d = '0;
    else if (sh < 10'sd0)               idx_d = '1;   // only when out_d
    else                                idx_d = KER_BITS'(mfull >> sh);
  end

  always_ff @(posedge clk) begin
    idx_q <= idx_d;
    out_q <= out_d;
    w      <= out_q ? F28_ZERO : rom[idx_q];
    cutoff <= out_q;
  end

endmodule
