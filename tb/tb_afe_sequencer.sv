// tb_afe_sequencer -- programs a random electrode order (with repeats) and
// checks: the multiplexer address of every slot, one phi_clr and one phi_smp
// per 4-cycle slot with phi_smp three cycles after phi_clr, 64 cycles
// between two samples of a slot (4 kS/s per channel at 256 kHz), the slot tag
// of each returned ADC word, and the blanking window (stimulation plus the
// programmed hold time).
module tb_afe_sequencer;
  import nc_pkg::*;
  logic clk = 0, rst_n = 0, enable = 0;
  always #5 clk = ~clk;
  logic [NCH-1:0][3:0] ch_order;
  logic [7:0] blank_hold = 8'd10;
  logic stim_active = 0;
  logic [3:0] addr_ch; logic phi_clr, phi_smp, en_blk;
  logic adc_valid = 0; logic [ADC_W-1:0] adc_data = 0;
  logic out_valid; logic [3:0] out_ch; logic [ADC_W-1:0] out_data;

  afe_sequencer dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0, last_clr = -100, exp_slot = 0, last_smp [NCH];
  int smp_q [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("cycle %0d: %s", cyc, msg); end
  endtask

  // monitor
  always @(posedge clk) begin
    cyc++;
    if (rst_n && enable) begin
      if (phi_clr) begin
        chk(addr_ch == ch_order[exp_slot], $sformatf("addr %0d exp %0d", addr_ch, ch_order[exp_slot]));
        if (last_clr >= 0) chk(cyc - last_clr == 4, "slot length");
        last_clr = cyc;
      end
      if (phi_smp) begin
        chk(cyc - last_clr == 3, "phi_smp position");
        if (last_smp[exp_slot] >= 0) chk(cyc - last_smp[exp_slot] == 64, "per-channel rate");
        last_smp[exp_slot] = cyc;
        smp_q.push_back(exp_slot);
        exp_slot = (exp_slot + 1) % 16;
      end
      if (out_valid) begin
        int s;
        s = smp_q.pop_front();
        chk(out_ch == 4'(s) && out_data == 10'(s * 37), $sformatf("tag %0d exp %0d", out_ch, s));
      end
    end
  end

  // ADC model: returns a word two cycles after phi_smp
  always @(posedge clk) begin
    adc_valid <= 1'b0;
    if (phi_smp) begin
      fork begin
        @(posedge clk);
        adc_valid <= 1'b1; adc_data <= 10'((smp_q[smp_q.size()-1]) * 37);
      end join_none
    end
  end

  initial begin
    for (int s = 0; s < NCH; s++) begin ch_order[s] = 4'($urandom); last_smp[s] = -1; end
    ch_order[5] = ch_order[2];
    repeat (3) @(posedge clk); #1 rst_n = 1; enable = 1;
    repeat (640) @(posedge clk);
    // blanking
    #1 stim_active = 1;
    repeat (20) begin @(posedge clk); #1 chk(en_blk, "blank during stimulation"); end
    stim_active = 0;
    repeat (10) begin @(posedge clk); #1 chk(en_blk, "blank hold"); end
    @(posedge clk); #1 chk(!en_blk, "blank released");
    repeat (100) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
