// tb_lpe -- self-checking testbench of the Lightweight Phase Extractor.
// Drives corner pairs (axes, octant borders, full-scale values) and random
// pairs of all magnitudes, and compares each phase with an arctangent
// computed in floating point (atan2 scaled so that pi = 512), allowing one
// LSB of error after wrap-around. Also checks the one-cycle latency.
module tb_lpe;
  import nc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  sample_t re = '0, im = '0;
  logic out_valid;
  phase_t phase;
  int checks = 0, failures = 0, maxerr = 0;

  lpe dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_phase(int r, int i);
    real a;
    int p;
    if (r == 0 && i == 0) return 0;
    a = $atan2(real'(i), real'(r)) * 512.0 / 3.14159265358979;
    p = $rtoi(a + ((a >= 0) ? 0.5 : -0.5));
    if (p >= 512) p -= 1024;
    return p;
  endfunction

  task automatic check(int r, int i);
    int e, d;
    re = sample_t'(r); im = sample_t'(i); in_valid = 1;
    @(posedge clk); #1;
    in_valid = 0;
    checks++;
    if (!out_valid) begin failures++; $display("no out_valid after one cycle"); end
    e = ref_phase(r, i);
    d = int'(phase) - e;
    if (d > 512) d -= 1024;
    if (d < -512) d += 1024;
    if (d < 0) d = -d;
    if (d > maxerr) maxerr = d;
    if (d > 1) begin
      failures++;
      if (failures < 10) $display("re=%0d im=%0d phase=%0d expected=%0d", r, i, phase, e);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    check(0, 0); check(100, 0); check(-100, 0); check(0, 100); check(0, -100);
    check(2047, 2047); check(-2048, -2048); check(-2048, 2047); check(2047, -2048);
    check(1, 1); check(-1, 1); check(1, -1); check(-1, -1); check(3, 1); check(-2048, 0);
    for (int k = 0; k < 20000; k++) begin
      int sh;
      sh = $urandom_range(0, 11);
      check($signed($urandom) >>> (20 + sh), $signed($urandom) >>> (20 + sh));
    end
    // sweep of the unit circle
    for (int k = 0; k < 1024; k++)
      check($rtoi(1500.0 * $cos(3.14159265358979 * k / 512.0)), $rtoi(1500.0 * $sin(3.14159265358979 * k / 512.0)));
    $display("max |error| = %0d LSB", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
