// tb_density_pass: one complete SPH density pass on the board.
//
// Workload: particles on a cubic lattice with spacing d = 0.1, mass
// m = 0.001 and smoothing length h = 1.3 d, so the true density of the
// medium is m / d^3 = 1. The 4 x 4 x 2 particles i in the middle of a
// 10 x 10 x 8 lattice each take every lattice point within 3 spacings per
// axis as a neighbour candidate (343 pairs, itself included); the kernel
// cut-off drops those beyond 2h. The particles alternate between the two
// pipelines, which run packed with no idle clock.
//
// Checks: every density against the real-arithmetic sum; every density
// within 3 % of the physical value 1 (the lattice sum of the cubic spline at
// h = 1.3 d); the whole pass, from first pair in to last density out,
// takes exactly pairs-per-pipe + PIPE_LAT clocks; cut-offs occurred.
module tb_density_pass;
  import aha_pkg::*;
  import tb_f28_pkg::*;

  localparam int  NP  = 2;
  localparam int  R   = 3;                    // neighbour search half-width
  localparam int  NB  = (2 * R + 1) ** 3;     // candidates per particle
  localparam int  NIX = 4, NIY = 4, NIZ = 2;  // particles i
  localparam int  NI  = NIX * NIY * NIZ;
  localparam real D   = 0.1;
  localparam real M   = 0.001;
  localparam real H   = 0.13;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic             rst_n;
  logic             in_valid  [NP];
  sph_pair_t        in_pair   [NP];
  logic             c_valid   [NP];
  f28_t             c_value   [NP];
  logic             c_cutoff  [NP];
  logic             out_valid [NP];
  logic [TAG_W-1:0] out_tag   [NP];
  f28_t             out_rho   [NP];

  int checks = 0, failures = 0, n_rho = 0, n_cut = 0;
  longint cyc = 0, t_start = -1, t_end = 0;

  aha_sph_board dut (.clk, .rst_n, .in_valid, .in_pair, .c_valid, .c_value,
                     .c_cutoff, .out_valid, .out_tag, .out_rho);

  initial begin
    repeat (NI * NB + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real want [NI];
  real tolv [NI];

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n) begin
    for (int p = 0; p < NP; p++) begin
      if (c_valid[p] && c_cutoff[p]) n_cut++;
      if (out_valid[p]) begin
        int  t;
        real got;
        t   = int'(out_tag[p]);
        got = f2r(out_rho[p]);
        n_rho++;
        t_end = cyc;
        if (t == 0) $display("particle 0: density %f, model %f", got, want[t]);
        checks += 2;
        if (!close(got, want[t], 0.0, tolv[t])) begin
          failures++; $display("FAIL particle %0d: got %g model %g", t, got, want[t]);
        end
        if (!close(got, M / (D * D * D), 0.03, 0.0)) begin
          failures++; $display("FAIL particle %0d: density %g, medium 1.0", t, got);
        end
      end
    end
  end

  function automatic sph_pair_t particle_i(int t);
    sph_pair_t p = '0;
    int ix, iy, iz;
    ix = 3 + t % NIX;
    iy = 3 + (t / NIX) % NIY;
    iz = 3 + t / (NIX * NIY);
    p.tag = TAG_W'(t);
    p.xi = r2f(D * ix); p.yi = r2f(D * iy); p.zi = r2f(D * iz);
    p.hi = r2f(H);
    return p;
  endfunction

  task automatic feed(int p);
    sph_pair_t pi_, pr;
    int k;
    for (int t = p; t < NI; t += NP) begin
      pi_ = particle_i(t);
      want[t] = 0.0;
      tolv[t] = 0.0;
      k = 0;
      for (int dx = -R; dx <= R; dx++)
        for (int dy = -R; dy <= R; dy++)
          for (int dz = -R; dz <= R; dz++) begin
            pr = pi_;
            pr.xj = r2f(f2r(pi_.xi) + D * dx);
            pr.yj = r2f(f2r(pi_.yi) + D * dy);
            pr.zj = r2f(f2r(pi_.zi) + D * dz);
            pr.hj = r2f(H);
            pr.mj = r2f(M);
            pr.first = (k == 0);
            pr.last  = (k == NB - 1);
            want[t] += cref(pr);
            tolv[t] += ctol(pr);
            @(negedge clk);
            if (t_start < 0) t_start = cyc;
            in_valid[p] = 1'b1;
            in_pair[p]  = pr;
            k++;
          end
    end
    @(negedge clk);
    in_valid[p] = 1'b0;
  endtask

  initial begin
    rst_n = 1'b0;
    for (int p = 0; p < NP; p++) begin in_valid[p] = 1'b0; in_pair[p] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    fork
      feed(0);
      feed(1);
    join
    repeat (PIPE_LAT + 5) @(negedge clk);
    // first pair registered at t_start + 1; the last density of a pipe that
    // carried NI/NP * NB pairs leaves PIPE_LAT clocks after its last pair.
    $display("densities %0d cut-offs %0d pass took %0d clocks (%0d pairs per pipe)",
             n_rho, n_cut, t_end - t_start, NI / NP * NB);
    checks += 3;
    if (n_rho != NI) begin failures++; $display("FAIL %0d densities, want %0d", n_rho, NI); end
    if (t_end - t_start != longint'(NI / NP * NB - 1 + PIPE_LAT)) begin
      failures++; $display("FAIL pass took %0d clocks", t_end - t_start);
    end
    if (n_cut == 0) begin failures++; $display("FAIL no cut-off"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
