// tb_fir_coeff_mem -- writes random coefficients into all four sets,
// including writes past each set's length that must be ignored, and checks
// that every slot presents its set on lanes C0..C(n-1) and zero on the rest.
module tb_fir_coeff_mem;
  import nc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we = 0; logic [6:0] addr = 0; coef_t wdata = 0;
  fir_slot_e slot = SLOT_LPF;
  coef_t coef [NLANE];
  int checks = 0, failures = 0;
  int ref_c [4][NLANE];
  int len [4] = '{13, 21, 21, 7};

  fir_coeff_mem dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int s = 0; s < 4; s++) for (int i = 0; i < NLANE; i++) ref_c[s][i] = 0;
    for (int r = 0; r < 3; r++)
      for (int s = 0; s < 4; s++)
        for (int i = 0; i < 32; i++) begin
          int v;
          v = $urandom_range(0, 4095) - 2048;
          @(posedge clk); #1;
          we = 1; addr = {2'(s), 5'(i)}; wdata = coef_t'(v);
          if (i < len[s]) ref_c[s][i] = v;
        end
    @(posedge clk); #1 we = 0;
    for (int s = 0; s < 4; s++) begin
      slot = fir_slot_e'(s);
      #1;
      for (int i = 0; i < NLANE; i++) begin
        checks++;
        if (int'(coef[i]) != ref_c[s][i]) begin
          failures++; $display("set %0d lane %0d: %0d exp %0d", s, i, coef[i], ref_c[s][i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
