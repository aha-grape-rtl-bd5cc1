// tb_fp_mul: self-checking test of the floating-point multiplier.
// Random operands of both signs, zeros, products that overflow (saturate) and underflow (flush to zero).
// Each result is compared with real arithmetic exactly 2 clocks after its
// operand was applied, which also checks the latency and the rate of one
// result per clock.
module tb_fp_mul;
  import aha_pkg::*;
  import tb_f28_pkg::*;

  localparam int NRAND = 3000;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  f28_t a, b, y;
  int   checks = 0, failures = 0;

  fp_mul dut (.clk, .a, .b, .y);

  initial begin
    repeat (NRAND + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  f28_t qa [$], qb [$];

  task automatic apply(f28_t ta, f28_t tb_);
    real want, got, ra, rb;
    @(negedge clk);
    a = ta; b = tb_;
    qa.push_back(ta); qb.push_back(tb_);
    if (qa.size() > 2) begin
      f28_t ca, cb;
      ca = qa.pop_front(); cb = qb.pop_front();
      ra = f2r(ca); rb = f2r(cb);
      if (ca.exp == 0 || cb.exp == 0)           want = 0.0;
      else if (fabs(ra * rb) >= 2.0 ** 65.0)     want = (ra * rb > 0.0) ? f2r(28'h7ffffff) : f2r(28'hfffffff);
      else if (fabs(ra * rb) < 2.0 ** -62.0)     want = 0.0;
      else                                       want = ra * rb;
      got  = f2r(y);
      checks++;
      if (!close(got, want, 2.0 ** -19.0, 0.0)) begin
        failures++;
        if (failures < 10) $display("FAIL a=%h b=%h: got %g want %g", ca, cb, got, want);
      end
    end
  endtask

  initial begin
    a = '0; b = '0;
    apply(r2f(1.5), r2f(2.0)); apply(r2f(-3.0), r2f(0.5)); apply(r2f(0.0), r2f(9.0)); apply(r2f(1.0e15), r2f(1.0e15)); apply(r2f(1.0e-12), r2f(1.0e-12)); apply(r2f(1.999999), r2f(1.999999));
    for (int i = 0; i < NRAND; i++) apply(rnd(32, 94, 1), rnd(32, 94, 1));
    repeat (2 + 1) apply(rnd(60, 66, 0), rnd(60, 66, 0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
