// tb_fp_addsub: self-checking test of the signed floating-point adder.
// Random operands of both signs and a spread of exponents, plus directed
// cases (exact sums, cancellation to zero, zero operands). Each result is
// checked against real arithmetic exactly LAT_ADD clocks after its operands
// were applied, which also checks the latency and the one-per-clock rate.
module tb_fp_addsub;
  import aha_pkg::*;
  import tb_f28_pkg::*;

  localparam int NRAND = 3000;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  f28_t a, b, y;
  logic sub;
  int   checks = 0, failures = 0;

  fp_addsub dut (.clk, .a, .b, .sub, .y);

  initial begin
    repeat (NRAND + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  f28_t qa [$], qb [$];
  logic qs [$];

  task automatic apply(f28_t ta, f28_t tb_, logic ts);
    real want, got, big;
    @(negedge clk);
    a = ta; b = tb_; sub = ts;
    qa.push_back(ta); qb.push_back(tb_); qs.push_back(ts);
    if (qa.size() > LAT_ADD) begin
      f28_t ca, cb; logic cs;
      ca = qa.pop_front(); cb = qb.pop_front(); cs = qs.pop_front();
      want = cs ? f2r(ca) - f2r(cb) : f2r(ca) + f2r(cb);
      got  = f2r(y);
      big  = fabs(f2r(ca)) > fabs(f2r(cb)) ? fabs(f2r(ca)) : fabs(f2r(cb));
      checks++;
      if (!close(got, want, 0.0, big * (2.0 ** -19.0))) begin
        failures++;
        if (failures < 10) $display("FAIL %h %s %h: got %g want %g", ca, cs ? "-" : "+", cb, got, want);
      end
    end
  endtask

  initial begin
    a = '0; b = '0; sub = 1'b0;
    // directed
    apply(r2f(3.0), r2f(1.0), 1'b1);     // 2
    apply(r2f(1.5), r2f(1.5), 1'b1);     // 0
    apply(r2f(-2.25), r2f(0.0), 1'b0);   // -2.25
    apply(r2f(0.0), r2f(5.0), 1'b1);     // -5
    apply(r2f(1.0), r2f(1.0), 1'b0);     // 2
    apply(r2f(1.0), r2f(-1.0e-4), 1'b0); // small cancellation
    apply(r2f(100.0), r2f(1.0e-9), 1'b0);// far apart
    for (int i = 0; i < NRAND; i++) begin
      if (i % 3 == 0) apply(rnd(55, 70, 1), rnd(55, 70, 1), 1'($urandom));
      else            apply(rnd(20, 110, 1), rnd(20, 110, 1), 1'($urandom));
    end
    repeat (LAT_ADD + 1) apply('0, '0, 1'b0);
    // exact results
    checks++;
    if (y !== F28_ZERO) begin failures++; $display("FAIL zero result %h", y); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
