// tb_sph_density_pipe: self-checking test of one SPH density pipeline.
//
// Streams NI particles, each with 1 to 60 random neighbours (about a third
// of them beyond the kernel's reach, X >= 2), through the pipeline with
// random idle clocks and with stretches of back-to-back pairs, and checks:
//   - every contribution m_j W / h^3 against the real-arithmetic model,
//     exactly T_C clocks after its pair entered (so one pair per clock);
//   - every finished density against the real sum (plus rho0), its tag,
//     and that it appears exactly PIPE_LAT clocks after the last pair.
// It counts how often each mechanism occurred (kernel cut-off, idle
// clocks, a particle with one neighbour, a non-zero starting density, a
// particle following another without a gap) and fails if one never did.
module tb_sph_density_pipe;
  import aha_pkg::*;
  import tb_f28_pkg::*;

  localparam int NI = 60;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic             rst_n, in_valid, c_valid, c_cutoff, out_valid;
  sph_pair_t        in_pair;
  f28_t             c_value, out_rho;
  logic [TAG_W-1:0] out_tag;
  int checks = 0, failures = 0;
  int n_cut = 0, n_bubble = 0, n_single = 0, n_rho0 = 0, n_b2b = 0, n_pairs = 0;
  longint cyc = 0;

  sph_density_pipe dut (.clk, .rst_n, .in_valid, .in_pair, .c_valid, .c_value,
                        .c_cutoff, .out_valid, .out_tag, .out_rho);

  initial begin
    repeat (NI * 120 + 500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { longint due; real want; real tol; logic cut; } cexp_t;
  typedef struct { longint due; real want; real tol; logic [TAG_W-1:0] tag; } rexp_t;
  cexp_t cq [$];
  rexp_t rq [$];

  always @(posedge clk) cyc <= cyc + 1;

  // Output monitor, sampled mid-cycle.
  always @(negedge clk) if (rst_n) begin
    if (c_valid) begin
      cexp_t e;
      checks++;
      if (cq.size() == 0) begin failures++; $display("FAIL unexpected contribution"); end
      else begin
        e = cq.pop_front();
        if (e.due != cyc || !close(f2r(c_value), e.want, 0.0, e.tol) || c_cutoff != e.cut) begin
          failures++;
          if (failures < 10) $display("FAIL contrib at %0d (due %0d): got %g want %g cut %0d/%0d",
                                      cyc, e.due, f2r(c_value), e.want, c_cutoff, e.cut);
        end
        if (c_cutoff) n_cut++;
      end
    end
    if (out_valid) begin
      rexp_t e;
      checks++;
      if (rq.size() == 0) begin failures++; $display("FAIL unexpected density"); end
      else begin
        e = rq.pop_front();
        if (e.due != cyc || !close(f2r(out_rho), e.want, 0.0, e.tol) || out_tag !== e.tag) begin
          failures++;
          if (failures < 10) $display("FAIL rho tag %0d at %0d (due %0d): got %g want %g",
                                      out_tag, cyc, e.due, f2r(out_rho), e.want);
        end
      end
    end
  end

  task automatic drive(logic v, sph_pair_t p);
    @(negedge clk);
    in_valid = v;
    in_pair  = p;
  endtask

  initial begin
    sph_pair_t pi_, p;
    real sum, tol;
    int  n;
    logic gap;
    rst_n = 1'b0; in_valid = 1'b0; in_pair = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < NI; i++) begin
      pi_ = rand_i(i, ($urandom % 4) == 0);
      if (pi_.rho0 != '0) n_rho0++;
      n   = (i % 10 == 3) ? 1 : 1 + int'($urandom % 60);
      if (n == 1) n_single++;
      sum = f2r(pi_.rho0);
      tol = 0.0;
      gap = 1'b0;
      for (int k = 0; k < n; k++) begin
        // idle clocks only in the first half of the run
        while (i < NI / 2 && ($urandom % 4) == 0) begin
          drive(1'b0, '0); n_bubble++; gap = 1'b1;
        end
        p = rand_pair(pi_, 0.12);
        p.first = (k == 0);
        p.last  = (k == n - 1);
        sum += cref(p);
        tol += ctol(p);
        drive(1'b1, p);
        n_pairs++;
        // the pair is registered at the next rising edge (cycle cyc + 1)
        cq.push_back('{due: cyc + T_C, want: cref(p), tol: ctol(p), cut: xref(p) >= 2.0});
        if (k == 0 && !gap && i > 0) n_b2b++;
        if (k == n - 1) rq.push_back('{due: cyc + PIPE_LAT, want: sum, tol: tol, tag: pi_.tag});
      end
    end
    repeat (PIPE_LAT + 5) drive(1'b0, '0);
    checks++;
    if (cq.size() != 0 || rq.size() != 0) begin failures++; $display("FAIL missing outputs"); end
    $display("pairs %0d cut-offs %0d idle %0d single %0d rho0 %0d back-to-back %0d",
             n_pairs, n_cut, n_bubble, n_single, n_rho0, n_b2b);
    checks += 5;
    if (n_cut == 0)    begin failures++; $display("FAIL no cut-off"); end
    if (n_bubble == 0) begin failures++; $display("FAIL no idle clock"); end
    if (n_single == 0) begin failures++; $display("FAIL no single-neighbour particle"); end
    if (n_rho0 == 0)   begin failures++; $display("FAIL no starting density"); end
    if (n_b2b == 0)    begin failures++; $display("FAIL no back-to-back particles"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
