// tb_sincos_lut -- exhaustive check of the sine/cosine table: all 1024 phases
// against 511*sin and 511*cos computed in floating point (one LSB allowed).
module tb_sincos_lut;
  import nc_pkg::*;
  phase_t phase;
  logic signed [TRIG_W:0] sin_o, cos_o;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  sincos_lut dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = -512; p < 512; p++) begin
      int es, ec;
      phase = phase_t'(p);
      #1;
      es = $rtoi(511.0 * $sin(3.14159265358979 * p / 512.0) + ((p >= 0 && p <= 511) ? 0.5 : -0.5));
      ec = $rtoi(511.0 * $cos(3.14159265358979 * p / 512.0) + ((p > -256 && p < 256) ? 0.5 : -0.5));
      checks += 2;
      if (int'(sin_o) - es > 1 || es - int'(sin_o) > 1) begin
        failures++; if (failures < 10) $display("p=%0d sin=%0d exp=%0d", p, sin_o, es);
      end
      if (int'(cos_o) - ec > 1 || ec - int'(cos_o) > 1) begin
        failures++; if (failures < 10) $display("p=%0d cos=%0d exp=%0d", p, cos_o, ec);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
