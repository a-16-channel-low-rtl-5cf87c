// tb_prbs_gen -- checks the 10-bit PRBS against an independent software LFSR
// (x^10 + x^7 + 1), that it holds without `advance`, that its period is
// exactly 1023 and that it never reaches zero.
module tb_prbs_gen;
  logic clk = 0, rst_n = 0, advance = 0;
  logic [9:0] value;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  prbs_gen dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [9:0] model, first;
    int period;
    model = 10'h001;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    checks++; if (value != 10'h001) failures++;
    repeat (5) @(posedge clk); #1;
    checks++; if (value != 10'h001) begin failures++; $display("moved without advance"); end
    first = value; period = 0;
    for (int k = 0; k < 2100; k++) begin
      advance = 1; @(posedge clk); #1; advance = 0;
      model = {model[8:0], model[9] ^ model[6]};
      checks++;
      if (value != model || value == 0) begin failures++; if (failures < 5) $display("k=%0d %h exp %h", k, value, model); end
      if (period == 0 && value == first) period = k + 1;
    end
    checks++; if (period != 1023) begin failures++; $display("period %0d", period); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
