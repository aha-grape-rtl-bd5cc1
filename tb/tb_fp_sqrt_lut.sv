// tb_fp_sqrt_lut: self-checking test of the table-based floating-point square root.
// Operands with even and odd exponents over the whole range, exact squares and zero; tolerance follows from the 10-bit table address.
// Each result is compared with real arithmetic exactly 2 clocks after its
// operand was applied, which also checks the latency and the rate of one
// result per clock.
module tb_fp_sqrt_lut;
  import aha_pkg::*;
  import tb_f28_pkg::*;

  localparam int NRAND = 4000;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  f28_t a, b, y;
  int   checks = 0, failures = 0;

  fp_sqrt_lut dut (.clk, .a, .y);

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
      want = $sqrt(ra);
      got  = f2r(y);
      checks++;
      if (!close(got, want, 2.0 ** -10.0, 0.0)) begin
        failures++;
        if (failures < 10) $display("FAIL a=%h b=%h: got %g want %g", ca, cb, got, want);
      end
    end
  endtask

  initial begin
    a = '0; b = '0;
    apply(r2f(4.0), '0); apply(r2f(2.0), '0); apply(r2f(0.0), '0); apply(r2f(1.0e-10), '0); apply(r2f(9.0e12), '0); apply(r2f(0.25), '0);
    for (int i = 0; i < NRAND; i++) apply(rnd(1, 127, 0), '0);
    repeat (2 + 1) apply(rnd(60, 66, 0), rnd(60, 66, 0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
