// tb_sph_kernel_lut: self-checking test of the kernel table.
// Applies scaled distances X over [0, 2.6), including tiny values, the
// branch point X = 1, values just below and above the cut-off X = 2 and
// zero, and compares W(X) and the cut-off flag with the cubic-spline kernel
// evaluated in real arithmetic, LAT_KER clocks after each input.
module tb_sph_kernel_lut;
  import aha_pkg::*;
  import tb_f28_pkg::*;

  localparam int NRAND = 4000;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  f28_t x, w;
  logic cutoff;
  int   checks = 0, failures = 0, ncut = 0;

  sph_kernel_lut dut (.clk, .x, .w, .cutoff);

  function automatic real wref(real q);
    real pi = 3.14159265358979;
    if (q < 1.0) return (1.0 - 1.5 * q * q + 0.75 * q * q * q) / pi;
    if (q < 2.0) return 0.25 * (2.0 - q) * (2.0 - q) * (2.0 - q) / pi;
    return 0.0;
  endfunction

  initial begin
    repeat (NRAND + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  f28_t qx [$];

  task automatic apply(f28_t tx);
    real q, got, want;
    @(negedge clk);
    x = tx;
    qx.push_back(tx);
    if (qx.size() > LAT_KER) begin
      f28_t cx;
      cx   = qx.pop_front();
      q    = f2r(cx);
      want = wref(q);
      got  = f2r(w);
      checks++;
      if (!close(got, want, 0.0, 5.0e-4) || cutoff != (q >= 2.0)) begin
        failures++;
        if (failures < 10) $display("FAIL X=%g: got %g want %g cutoff %0d", q, got, want, cutoff);
      end
      if (cutoff) ncut++;
    end
  endtask

  initial begin
    x = '0;
    apply('0); apply(r2f(1.0e-6)); apply(r2f(0.5)); apply(r2f(1.0)); apply(r2f(0.9999));
    apply(r2f(1.9999)); apply(r2f(2.0)); apply(r2f(2.5)); apply(r2f(1000.0)); apply(r2f(0.01));
    for (int i = 0; i < NRAND; i++) apply(r2f(2.6 * real'($urandom % 100000) / 100000.0));
    repeat (LAT_KER + 1) apply(r2f(0.75));
    checks++;
    if (ncut == 0) begin failures++; $display("FAIL cut-off never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
