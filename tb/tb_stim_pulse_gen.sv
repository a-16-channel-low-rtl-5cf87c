// tb_stim_pulse_gen -- checks the biphasic pulse sequence of each channel:
// POS for PW cycles starting one cycle after EN_STIM, then NEG for PW cycles,
// then CB_A for CBA_CYC and CB_P for CBP_CYC cycles, with EN_CP and the
// activity flag; the corrective current gating by the residual comparators
// during CB_A only; repetition every FREQ ms while EN_STIM is held; no
// retrigger during a pulse; PW = 0 disables. Reduced CB window lengths.
module tb_stim_pulse_gen;
  import nc_pkg::*;
  localparam int CPM = 16, CBA = 5, CBP = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NSTIM-1:0] en_stim = 0, cmp_hi = 0, cmp_lo = 0;
  logic [5:0] pw = 6'd3; logic [7:0] freq = 8'd4;
  logic [NSTIM-1:0] pos, neg, cb_a, cb_p, cb_pos, cb_neg;
  logic en_cp, stim_active;

  stim_pulse_gen #(.CLK_PER_MS(CPM), .CBA_CYC(CBA), .CBP_CYC(CBP)) dut (.*);

  int checks = 0, failures = 0, pulses = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("%t: %s", $time, msg); end
  endtask

  // expect one complete pulse on channel c starting at the next cycle
  task automatic expect_pulse(int c, int w);
    for (int k = 0; k < w; k++) begin
      @(posedge clk); #1;
      chk(pos[c] && !neg[c] && en_cp && stim_active, $sformatf("POS phase ch%0d k=%0d", c, k));
    end
    for (int k = 0; k < w; k++) begin
      @(posedge clk); #1;
      chk(neg[c] && !pos[c] && en_cp, $sformatf("NEG phase ch%0d k=%0d", c, k));
    end
    for (int k = 0; k < CBA; k++) begin
      @(posedge clk); #1;
      cmp_hi[c] = (k == 1); cmp_lo[c] = (k == 3); #1;
      chk(cb_a[c] && !pos[c] && !neg[c] && en_cp, "CB_A window");
      chk(cb_neg[c] == (k == 1) && cb_pos[c] == (k == 3), "active CB gating");
    end
    cmp_hi[c] = 1; cmp_lo[c] = 1;
    for (int k = 0; k < CBP; k++) begin
      @(posedge clk); #1;
      chk(cb_p[c] && !cb_a[c] && !cb_pos[c] && !cb_neg[c] && !en_cp && stim_active, "CB_P window");
    end
    cmp_hi[c] = 0; cmp_lo[c] = 0;
    @(posedge clk); #1;
    chk(!pos[c] && !neg[c] && !cb_a[c] && !cb_p[c], "back to idle");
    pulses++;
  endtask

  initial begin
    repeat (3) @(posedge clk); #1 rst_n = 1;
    // single trigger on channel 1
    @(posedge clk); #1 en_stim = 4'b0010;
    @(posedge clk); #1 en_stim = 0;
    chk(pos[1], "POS one cycle after EN_STIM");
    // (expect_pulse starts counting from the first POS cycle already seen)
    for (int k = 1; k < 3; k++) begin @(posedge clk); #1 chk(pos[1], "POS width"); end
    for (int k = 0; k < 3; k++) begin @(posedge clk); #1 chk(neg[1], "NEG width"); end
    repeat (CBA + CBP + 1) @(posedge clk);
    #1 chk(!stim_active, "idle after the pulse");
    chk(pos == 0 && neg == 0, "other channels quiet");
    // repetition while EN_STIM is held on channel 2: period FREQ*CPM = 64 cycles
    pw = 6'd5;
    @(posedge clk); #1 en_stim = 4'b0100;
    expect_pulse(2, 5);
    // wait for the rest of the period: no new pulse before 64 cycles from the first POS
    repeat (64 - (2 * 5 + CBA + CBP + 1)) begin @(posedge clk); #1 chk(!pos[2], "no early repeat"); end
    expect_pulse(2, 5);
    en_stim = 0;
    repeat (80) begin @(posedge clk); #1 chk(!pos[2], "stops when EN_STIM drops"); end
    // PW = 0 disables
    pw = 6'd0;
    @(posedge clk); #1 en_stim = 4'b1000;
    @(posedge clk); #1 en_stim = 0;
    repeat (10) begin @(posedge clk); #1 chk(!stim_active, "PW=0 disabled"); end
    chk(pulses == 2, "pulse count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
