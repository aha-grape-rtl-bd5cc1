// sph_density_pipe: one instance of the SPH density loop body.
//
// For every neighbour pair (i, j) it evaluates
//   r_ij   = | r_i - r_j |                       (3-D distance)
//   h_ij   = (h_i + h_j) / 2                     (mean smoothing length)
//   X      = r_ij / h_ij
//   rho_i += m_j * W(X) / h_ij^3                 (W from a table)
// and emits rho_i once the last neighbour of particle i has been added.
// One pair enters per clock and, after the pipeline has filled, one
// contribution leaves per clock: no stalls, no back-pressure. Bubbles
// (in_valid low) are allowed anywhere.
//
// The units and their order follow the paper's mapping of the loop onto an
// FPGA array: three signed subtractors, three computed squares, two unsigned
// adds (dx^2 + dz^2, then + dy^2), a table root combined with the multiply
// by 1/h_ij, the signed add that forms (h_i + h_j)/2, a table reciprocal
// and a table cube of the reciprocal, a two-stage kernel table, the
// multiplies by m_j and by 1/h_ij^3, and the accumulating add into rho_i.
// The paper's figure labels the smoothing-length node "(Hi - hj)/2" while
// its code says (h_i + h_j)/2; the sum is used here.
//
// Schedule (clock after entry at which a value is ready; see aha_pkg):
//   2 dx,dy,dz,h_i+h_j   4 squares, 1/h_ij   6 dx^2+dz^2, 1/h_ij^3
//   8 r_ij^2   10 r_ij   12 X   14 W(X)   16 m_j W   18 contribution
//   19 rho_i (PIPE_LAT)
// delay_line instances hold 1/h_ij, dy^2, 1/h_ij^3, m_j and the framing
// bits until their partners arrive. The per-pair contribution and whether
// the kernel cut off (X >= 2) are also brought out, mainly for observation.
module sph_density_pipe
  import aha_pkg::*;
#(
  parameter int LUT_BITS = 10,
  parameter int KER_BITS = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  sph_pair_t        in_pair,
  output logic             c_valid,     // a contribution is on c_value
  output f28_t             c_value,     // m_j W(X) / h_ij^3
  output logic             c_cutoff,    // that pair had X >= 2
  output logic             out_valid,   // rho_i finished
  output logic [TAG_W-1:0] out_tag,
  output f28_t             out_rho
);

  // Framing that travels alongside the data.
  typedef struct packed {
    logic             valid;
    logic             first;
    logic             last;
    logic [TAG_W-1:0] tag;
    f28_t             rho0;
  } frame_t;

  frame_t fr_in, fr_c;
  assign fr_in = '{valid: in_valid, first: in_pair.first, last: in_pair.last,
                   tag: in_pair.tag, rho0: in_pair.rho0};

  // ---- coordinate differences and mean smoothing length (T_SUB)
  f28_t dx, dy, dz, hsum, hmean;
  fp_addsub u_dx (.clk, .a(in_pair.xi), .b(in_pair.xj), .sub(1'b1), .y(dx));
  fp_addsub u_dy (.clk, .a(in_pair.yi), .b(in_pair.yj), .sub(1'b1), .y(dy));
  fp_addsub u_dz (.clk, .a(in_pair.zi), .b(in_pair.zj), .sub(1'b1), .y(dz));
  fp_addsub u_hs (.clk, .a(in_pair.hi), .b(in_pair.hj), .sub(1'b0), .y(hsum));
  assign hmean = f28_half(hsum);

  // ---- squares (T_SQ) and 1/h_ij (T_RH)
  f28_t dx2, dy2, dz2, rh;
  fp_square u_sx (.clk, .a(dx), .y(dx2));
  fp_square u_sy (.clk, .a(dy), .y(dy2));
  fp_square u_sz (.clk, .a(dz), .y(dz2));
  fp_recip_lut #(.LUT_BITS(LUT_BITS)) u_rh (.clk, .a(hmean), .y(rh));

  // ---- r_ij^2 = (dx^2 + dz^2) + dy^2 (T_S2) and 1/h_ij^3 (T_RH3)
  f28_t s1, dy2_d, s2, rh3;
  fp_uadd u_s1 (.clk, .a(dx2), .b(dz2), .y(s1));
  delay_line #(.T(f28_t), .DEPTH(T_S1 - T_SQ)) u_d_dy2 (.clk, .rst_n, .in(dy2), .out(dy2_d));
  fp_uadd u_s2 (.clk, .a(s1), .b(dy2_d), .y(s2));
  fp_rcube_lut #(.LUT_BITS(LUT_BITS)) u_rh3 (.clk, .a(rh), .y(rh3));

  // ---- r_ij (T_R) and X = r_ij / h_ij (T_X)
  f28_t r, rh_d, xq;
  fp_sqrt_lut #(.LUT_BITS(LUT_BITS)) u_sqrt (.clk, .a(s2), .y(r));
  delay_line #(.T(f28_t), .DEPTH(T_R - T_RH)) u_d_rh (.clk, .rst_n, .in(rh), .out(rh_d));
  fp_mul u_x (.clk, .a(r), .b(rh_d), .y(xq));

  // ---- W(X) (T_W), m_j W (T_WM), m_j W / h^3 (T_C)
  f28_t w, mj_d, wm, rh3_d, c;
  logic cut;
  sph_kernel_lut #(.KER_BITS(KER_BITS)) u_w (.clk, .x(xq), .w(w), .cutoff(cut));
  delay_line #(.T(f28_t), .DEPTH(T_W)) u_d_mj (.clk, .rst_n, .in(in_pair.mj), .out(mj_d));
  fp_mul u_wm (.clk, .a(w), .b(mj_d), .y(wm));
  delay_line #(.T(f28_t), .DEPTH(T_WM - T_RH3)) u_d_rh3 (.clk, .rst_n, .in(rh3), .out(rh3_d));
  fp_mul u_c (.clk, .a(wm), .b(rh3_d), .y(c));

  // Cut-off flag, delayed from T_W to T_C.
  logic cut_c;
  delay_line #(.T(logic), .DEPTH(T_C - T_W)) u_d_cut (.clk, .rst_n, .in(cut), .out(cut_c));

  // ---- framing to T_C and the accumulating add
  delay_line #(.T(frame_t), .DEPTH(T_C)) u_d_fr (.clk, .rst_n, .in(fr_in), .out(fr_c));

  rho_accum u_acc (
    .clk, .rst_n,
    .in_valid (fr_c.valid),
    .in_first (fr_c.first),
    .in_last  (fr_c.last),
    .in_tag   (fr_c.tag),
    .rho0     (fr_c.rho0),
    .contrib  (c),
    .out_valid,
    .out_tag,
    .out_rho
  );

  assign c_valid  = fr_c.valid;
  assign c_value  = c;
  assign c_cutoff = cut_c;

endmodule
