// tb_aha_sph_board: end-to-end test of the SPH board at its default size
// (two pipelines, 10-bit tables).
//
// Each pipeline gets its own stream of particles with Nn = 50 neighbours
// (the typical neighbour count of the SPH runs the machine targets), some
// particles with other counts, idle clocks in part of the run and a fully
// packed stretch. The test checks every density against the real-arithmetic
// model, its tag and its arrival exactly PIPE_LAT clocks after the last
// pair, every contribution exactly T_C clocks after its pair, and that both
// pipelines delivered results in the same clock at least once. It counts
// kernel cut-offs, idle clocks, single-neighbour particles, non-zero starting
// densities and simultaneous outputs, and fails if any never occurred.
module tb_aha_sph_board;
  import aha_pkg::*;
  import tb_f28_pkg::*;

  localparam int NP = 2;        // the board's default pipe count
  localparam int NI = 40;       // particles per pipe
  localparam int NN = 50;       // neighbours per particle
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

  int checks = 0, failures = 0;
  int n_cut = 0, n_bubble = 0, n_single = 0, n_rho0 = 0, n_both = 0, n_rho = 0;
  longint cyc = 0;

  aha_sph_board dut (.clk, .rst_n, .in_valid, .in_pair, .c_valid, .c_value,
                     .c_cutoff, .out_valid, .out_tag, .out_rho);

  initial begin
    repeat (NI * NN * 2 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { longint due; real want; real tol; logic cut; } cexp_t;
  typedef struct { longint due; real want; real tol; logic [TAG_W-1:0] tag; } rexp_t;
  cexp_t cq [NP][$];
  rexp_t rq [NP][$];

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n) begin
    if (out_valid[0] && out_valid[1]) n_both++;
    for (int p = 0; p < NP; p++) begin
      if (c_valid[p]) begin
        cexp_t e;
        checks++;
        if (cq[p].size() == 0) begin failures++; $display("FAIL pipe %0d unexpected contribution", p); end
        else begin
          e = cq[p].pop_front();
          if (e.due != cyc || !close(f2r(c_value[p]), e.want, 0.0, e.tol) || c_cutoff[p] != e.cut) begin
            failures++;
            if (failures < 10) $display("FAIL pipe %0d contrib at %0d (due %0d): got %g want %g",
                                        p, cyc, e.due, f2r(c_value[p]), e.want);
          end
          if (c_cutoff[p]) n_cut++;
        end
      end
      if (out_valid[p]) begin
        rexp_t e;
        checks++;
        n_rho++;
        if (rq[p].size() == 0) begin failures++; $display("FAIL pipe %0d unexpected density", p); end
        else begin
          e = rq[p].pop_front();
          if (e.due != cyc || !close(f2r(out_rho[p]), e.want, 0.0, e.tol) || out_tag[p] !== e.tag) begin
            failures++;
            if (failures < 10) $display("FAIL pipe %0d rho tag %0d at %0d (due %0d): got %g want %g",
                                        p, out_tag[p], cyc, e.due, f2r(out_rho[p]), e.want);
          end
        end
      end
    end
  end

  task automatic feed(int p);
    sph_pair_t pi_, pr;
    real sum, tol;
    int  n;
    for (int i = 0; i < NI; i++) begin
      pi_ = rand_i(p * 1000 + i, (i % 7) == 2);
      if (pi_.rho0 != '0) n_rho0++;
      n = (i % 13 == 5) ? 1 : ((i % 5 == 4) ? 1 + int'($urandom % 80) : NN);
      if (n == 1) n_single++;
      sum = f2r(pi_.rho0);
      tol = 0.0;
      for (int k = 0; k < n; k++) begin
        while (i >= NI / 2 && ($urandom % 6) == 0) begin
          @(negedge clk);
          in_valid[p] = 1'b0;
          n_bubble++;
        end
        pr = rand_pair(pi_, 0.12);
        pr.first = (k == 0);
        pr.last  = (k == n - 1);
        sum += cref(pr);
        tol += ctol(pr);
        @(negedge clk);
        in_valid[p] = 1'b1;
        in_pair[p]  = pr;
        cq[p].push_back('{due: cyc + T_C, want: cref(pr), tol: ctol(pr), cut: xref(pr) >= 2.0});
        if (k == n - 1) rq[p].push_back('{due: cyc + PIPE_LAT, want: sum, tol: tol, tag: pi_.tag});
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
    checks++;
    for (int p = 0; p < NP; p++)
      if (cq[p].size() != 0 || rq[p].size() != 0) begin failures++; $display("FAIL pipe %0d missing outputs", p); end
    $display("densities %0d cut-offs %0d idle %0d single %0d rho0 %0d simultaneous %0d",
             n_rho, n_cut, n_bubble, n_single, n_rho0, n_both);
    checks += 5;
    if (n_cut == 0)    begin failures++; $display("FAIL no cut-off"); end
    if (n_bubble == 0) begin failures++; $display("FAIL no idle clock"); end
    if (n_single == 0) begin failures++; $display("FAIL no single-neighbour particle"); end
    if (n_rho0 == 0)   begin failures++; $display("FAIL no starting density"); end
    if (n_both == 0)   begin failures++; $display("FAIL pipes never finished together"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
