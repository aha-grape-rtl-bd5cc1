// fp_rcube_lut: cube of the reciprocal smoothing length, by table look-up.
//
// Takes the reciprocal r = 1/h_ij from fp_recip_lut and returns y ~ r^3 =
// 1/h_ij^3, the normalisation of the 3-D SPH kernel. For r = 2^e * 1.m the
// cube is 2^(3e) * (1.m)^3 with (1.m)^3 in [1, 8). A table addressed by the
// LUT_BITS leading bits of m holds, for the midpoint of each interval, the
// 20-bit mantissa of (1.m)^3 and its 2-bit exponent offset (0, 1 or 2);
// the exponent 3e + offset is computed. Relative error is below about
// 3 * 2^-(LUT_BITS+1).
//
// The paper names the unit ("cube of reciprocal with LUT") and draws it
// connected to the 1/h_ij unit; taking 1/h_ij as its input, the table size
// and the table contents are this design's choices
// (LUT_BITS = 10, 1024 entries of 22 bits), computed at elaboration from the
// exact integer cube of 2^(LUT_BITS+1) + 2k + 1.
//
// Stage 1 registers the address and 3e, stage 2 reads the table and forms
// the exponent. Latency LAT_LUT = 2 clocks, one operation per clock, no reset.
// Overflow saturates, underflow flushes to zero, 0^3 = 0.
module fp_rcube_lut
  import aha_pkg::*;
#(
  parameter int LUT_BITS = 10
) (
  input  logic clk,
  input  f28_t a,
  output f28_t y
);

  localparam int N = 1 << LUT_BITS;

  typedef struct packed {
    logic [1:0]       off;
    logic [MAN_W-1:0] man;
  } cube_entry_t;

  function automatic cube_entry_t entry(int k);
    logic [127:0] d, c;
    f28_t f;
    cube_entry_t r;
    d = (128'd1 << (LUT_BITS + 1)) + 128'(2 * k + 1);
    c = d * d * d;
    f = fix_to_f28(c, 3 * (LUT_BITS + 1));
    r.off = 2'(int'(f.exp) - BIAS);
    r.man = f.man;
    return r;
  endfunction

  cube_entry_t rom [N];
  for (genvar k = 0; k < N; k++) begin : g_rom
    localparam cube_entry_t V = entry(k);
    assign rom[k] = V;
  end

  logic [LUT_BITS-1:0] idx_q;
  logic signed [10:0]  e3_q;     // 3 * unbiased exponent + bias
  logic                sign_q, zero_q;
  cube_entry_t         ent;
  logic signed [10:0]  e;

  always_ff @(posedge clk) begin
    idx_q  <= a.man[MAN_W-1 -: LUT_BITS];
    e3_q   <= 11'sd3 * ($signed({4'b0, a.exp}) - 11'sd63) + 11'sd63;
    sign_q <= a.sign;
    zero_q <= (a.exp == '0);
  end

  always_comb begin
    ent = rom[idx_q];
    e   = e3_q + $signed({9'b0, ent.off});
  end

  always_ff @(posedge clk) begin
    if (zero_q || e < 11'sd1)  y <= F28_ZERO;
    else if (e > 11'sd127)     y <= f28_sat(sign_q);
    else                       y <= '{sign: sign_q, exp: e[EXP_W-1:0], man: ent.man};
  end

endmodule
