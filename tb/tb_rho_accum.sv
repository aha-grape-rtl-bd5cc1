// tb_rho_accum: self-checking test of the density accumulator.
// Feeds groups of random positive contributions (1 to 60 per particle,
// single-contribution groups included) with random idle clocks, random
// initial densities, and checks each finished density against a real sum,
// its tag, and that it appears exactly LAT_ACC clock after the last
// contribution and at no other time.
module tb_rho_accum;
  import aha_pkg::*;
  import tb_f28_pkg::*;

  localparam int NGROUPS = 300;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic             rst_n, in_valid, in_first, in_last, out_valid;
  logic [TAG_W-1:0] in_tag, out_tag;
  f28_t             rho0, contrib, out_rho;
  int               checks = 0, failures = 0, nsingle = 0;

  rho_accum dut (.clk, .rst_n, .in_valid, .in_first, .in_last, .in_tag, .rho0,
                 .contrib, .out_valid, .out_tag, .out_rho);

  initial begin
    repeat (NGROUPS * 100 + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected result for the clock after the current input.
  logic             exp_valid = 1'b0;
  real              exp_rho;
  logic [TAG_W-1:0] exp_tag;

  task automatic step(logic v, logic f, logic l, logic [TAG_W-1:0] t, f28_t r0, f28_t c, real sum);
    @(negedge clk);
    // check what the previous clock produced
    checks++;
    if (out_valid !== exp_valid) begin
      failures++; $display("FAIL out_valid %0d want %0d", out_valid, exp_valid);
    end else if (exp_valid) begin
      checks++;
      if (!close(f2r(out_rho), exp_rho, 2.0 ** -16.0, 0.0) || out_tag !== exp_tag) begin
        failures++; $display("FAIL rho %g want %g tag %0d/%0d", f2r(out_rho), exp_rho, out_tag, exp_tag);
      end
    end
    in_valid = v; in_first = f; in_last = l; in_tag = t; rho0 = r0; contrib = c;
    exp_valid = v && l; exp_rho = sum; exp_tag = t;
  endtask

  initial begin
    real  sum;
    int   n;
    f28_t r0, c;
    rst_n = 1'b0; in_valid = 0; in_first = 0; in_last = 0; in_tag = '0;
    rho0 = '0; contrib = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int g = 0; g < NGROUPS; g++) begin
      n   = 1 + int'($urandom % 60);
      if (n == 1) nsingle++;
      r0  = ($urandom % 4 == 0) ? rnd(55, 66, 0) : F28_ZERO;
      sum = f2r(r0);
      for (int k = 0; k < n; k++) begin
        while ($urandom % 5 == 0) step(1'b0, 1'b0, 1'b0, '0, '0, '0, 0.0);
        c   = rnd(55, 68, 0);
        sum = sum + f2r(c);
        step(1'b1, k == 0, k == n - 1, TAG_W'(g), r0, c, sum);
      end
    end
    step(1'b0, 1'b0, 1'b0, '0, '0, '0, 0.0);
    step(1'b0, 1'b0, 1'b0, '0, '0, '0, 0.0);
    $display("single-neighbour groups: %0d", nsingle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
