// tb_stim_controller -- exercises every stimulation mode of the controller
// with phase ramps, amplitude steps and window values, against a behavioural
// reference of the rules: rising crossing of TH_SMP (memory or PRBS), no
// trigger on a -pi -> +pi wrap, window range TH_WIN,L < F_WIN < TH_WIN,H held
// per window, minimum interval between triggers, EN_STIM = channel mask for
// one cycle right after the sample. Counts triggers per mode and fails if a
// mode never triggered.
module tb_stim_controller;
  import nc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic smp_valid = 0; logic [3:0] smp_ch = 0;
  phase_t phase [NCH]; amp_t amp [NCH];
  logic win_valid = 0; fwin_t f_pair [NPAIR]; fwin_t f_se [NCH];
  logic [4:0] sel_fsmp = 5'd3, sel_fwin = 5'd2;
  logic sel_th = 0; stim_mode_e sel_mode = MODE_SMP;
  fsmp_t th_smp = 13'sd200; fwin_t th_win_h = 24'd300, th_win_l = 24'd100;
  logic [9:0] min_interval = 10'd0;
  logic [NSTIM-1:0] stim_ch_en = 4'b0101;
  logic [NSTIM-1:0] en_stim; logic smp_event, win_ok; logic [9:0] prbs_th;

  stim_controller dut (.*);

  int checks = 0, failures = 0;
  int n_smp = 0, n_win = 0, n_both = 0, n_prbs = 0, n_wrap = 0, n_refr = 0, n_amp = 0;
  // reference state
  bit m_cmp_z1 = 1; int m_prev = 0; bit m_win_ok = 0; int m_since = 1023;
  logic [9:0] m_prbs = 10'h001;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic window(int v);
    f_pair[2] = fwin_t'(v); f_se[1] = fwin_t'(v);
    @(posedge clk); #1 win_valid = 1;
    @(posedge clk); #1 win_valid = 0;
    m_win_ok = (v < int'(th_win_h)) && (v > int'(th_win_l));
  endtask

  // one refresh of channel ch; returns whether a trigger was expected
  task automatic sample(int ch, int val, output bit trig);
    bit tick, cmp, crossing, wr;
    int f, th;
    if (sel_fsmp[4]) amp[ch] = amp_t'(val); else phase[ch] = phase_t'(val);
    tick = (ch == int'(sel_fsmp[3:0]));
    f  = sel_fsmp[4] ? int'(amp[sel_fsmp[3:0]]) : int'(phase[sel_fsmp[3:0]]);
    th = sel_th ? int'($signed(m_prbs)) : int'(th_smp);
    cmp = f > th;
    wr  = !sel_fsmp[4] && (f - m_prev > 512);
    crossing = cmp && !m_cmp_z1 && !wr;
    trig = 0;
    if (tick) begin
      if (m_since >= int'(min_interval))
        case (sel_mode)
          MODE_SMP:     trig = crossing;
          MODE_WIN:     trig = m_win_ok;
          MODE_SMP_WIN: trig = crossing && m_win_ok;
          default:      trig = 0;
        endcase
      if (cmp && !m_cmp_z1 && wr) n_wrap++;
      if (crossing && m_since < int'(min_interval) && sel_mode == MODE_SMP) n_refr++;
      m_cmp_z1 = cmp; m_prev = f;
      if (trig) m_since = 0; else if (m_since < 1023) m_since++;
      if (trig) m_prbs = {m_prbs[8:0], m_prbs[9] ^ m_prbs[6]};
    end
    @(posedge clk); #1;
    smp_valid = 1; smp_ch = 4'(ch);
    @(posedge clk); #1;
    smp_valid = 0;
    checks++;
    if (en_stim != (trig ? stim_ch_en : 4'b0)) begin
      failures++;
      if (failures < 10) $display("mode %0d ch %0d val %0d: en_stim %b expected %b", sel_mode, ch, val, en_stim, trig ? stim_ch_en : 4'b0);
    end
    @(posedge clk); #1;
    checks++;
    if (en_stim != 0) begin failures++; $display("EN_STIM longer than one cycle"); end
  endtask

  // a phase ramp of `n` samples on channel 3 with step `d` (other channels interleaved)
  task automatic ramp(int start, int d, int n, ref int count);
    bit t;
    int p;
    p = start;
    for (int k = 0; k < n; k++) begin
      sample(2, $urandom_range(0, 1023) - 512, t);  // other channel: never a tick
      if (t) count++;
      p = p + d;
      if (p >= 512) p -= 1024;
      if (p < -512) p += 1024;
      sample(3, p, t);
      if (t) count++;
    end
  endtask

  initial begin
    for (int c = 0; c < NCH; c++) begin phase[c] = 0; amp[c] = 0; f_se[c] = 0; end
    for (int p = 0; p < NPAIR; p++) f_pair[p] = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    // 1) phase-locked, forward ramp at 6 Hz
    sel_mode = MODE_SMP;
    ramp(-512, 6, 600, n_smp);
    // backward-running phase: the -pi -> +pi wraps must not trigger
    ramp(0, -7, 400, n_smp);
    // rate cap
    min_interval = 10'd200;
    ramp(0, 25, 600, n_smp);
    min_interval = 10'd0;
    // 2) window-locked
    sel_mode = MODE_WIN;
    window(200); ramp(0, 6, 50, n_win);
    window(400); ramp(0, 6, 50, n_win);
    window(100); ramp(0, 6, 50, n_win);
    min_interval = 10'd20;
    window(150); ramp(0, 6, 100, n_win);
    min_interval = 10'd0;
    // 3) phase and window
    sel_mode = MODE_SMP_WIN;
    sel_fwin = 5'd9;  // SE of channel 1
    window(250); ramp(0, 6, 400, n_both);
    window(50);  ramp(0, 6, 400, n_both);
    // randomised threshold from the PRBS
    sel_mode = MODE_SMP; sel_th = 1; sel_fwin = 5'd2;
    ramp(0, 5, 3000, n_prbs);
    sel_th = 0;
    // amplitude as the per-sample feature
    sel_fsmp = 5'd16 + 5'd3; th_smp = 13'sd700;
    for (int k = 0; k < 200; k++) begin
      bit t;
      sample(3, (k % 20 < 10) ? 300 : 900, t);
      if (t) n_amp++;
    end
    checks++;
    if (prbs_th != m_prbs) begin failures++; $display("prbs %h exp %h", prbs_th, m_prbs); end
    $display("triggers: smp=%0d win=%0d both=%0d prbs=%0d amp=%0d; wraps ignored=%0d; capped=%0d",
             n_smp, n_win, n_both, n_prbs, n_amp, n_wrap, n_refr);
    checks += 7;
    if (n_smp == 0 || n_win == 0 || n_both == 0 || n_prbs == 0 || n_amp == 0 || n_wrap == 0 || n_refr == 0) begin
      failures++; $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
