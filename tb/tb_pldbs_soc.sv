// tb_pldbs_soc -- end-to-end test of the digital core at its default sizes
// (16 channels, 25/42/15-tap FIR, 8 pairs, 4 stimulator channels, 256 kHz
// clock, 256-sample windows).
//
// A behavioural AFE/ADC feeds synthetic electrode signals: electrode 0 a 40 Hz
// oscillation, electrode 1 the same 60 degrees later, electrode 2 noise,
// electrode 3 a 120 Hz oscillation whose amplitude follows the phase of
// electrode 0, electrode 4 an unmodulated 120 Hz oscillation, the others
// smaller oscillations. Slot 5 reads electrode 0 again with the second band.
// Windowed FIR coefficients are computed here and written through the
// coefficient port. The test walks through the stimulation modes
// (phase-locked, rate-capped, PLV-window-locked, phase & PLV, randomised
// PRBS threshold) and checks:
//  * every FIR output of slot 0 bit-exactly against a direct-form model;
//  * every phase within 1 LSB of atan2 of the FIR pair, every amplitude exact;
//  * PLV(0,1) > PLV(0,2), PAC(0->3) > PAC(0->4), SE ordering;
//  * each EN_STIM against the rule of the active mode, pulses and blanking;
//  * that each mechanism (decimation, both bands, window close, each mode,
//    rate cap, PRBS threshold, blanking, active CB gating) happened.
module tb_pldbs_soc;
  import nc_pkg::*;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0, enable = 0;
  always #5 clk = ~clk;

  soc_cfg_t cfg;
  logic coef_we = 0; logic [6:0] coef_addr = 0; coef_t coef_wdata = 0;
  logic [3:0] afe_addr_ch; logic afe_phi_clr, afe_phi_smp, afe_en_blk;
  logic adc_valid = 0; logic [ADC_W-1:0] adc_data = 0;
  logic [NSTIM-1:0] stim_pos, stim_neg, stim_cb_a, stim_cb_p, stim_cb_pos, stim_cb_neg;
  logic stim_en_cp;
  logic [NSTIM-1:0] cb_cmp_hi = 0, cb_cmp_lo = 4'b1111;
  logic fir_valid; logic [3:0] fir_ch;
  sample_t fir_lpf, fir_bpf1, fir_bpf2, fir_ht_re, fir_ht_im;
  logic smp_valid; logic [3:0] smp_ch;
  phase_t f_phase [NCH]; amp_t f_amp [NCH];
  logic win_valid; fwin_t f_pair [NPAIR]; fwin_t f_se [NCH];
  logic [NSTIM-1:0] en_stim; logic smp_event, win_ok; logic [9:0] prbs_th;

  pldbs_soc dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  int c_set [4][NLANE];

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("cycle %0d: %s", cyc, msg); end
  endtask

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- behavioural AFE + ADC ----------------
  function automatic real electrode(int e, real t);
    real th;
    th = 2.0 * PI * 40.0 * t;
    case (e)
      0: return 200.0 * $cos(th);
      1: return 180.0 * $cos(th - PI / 3.0);
      2: return real'($urandom_range(0, 200)) - 100.0;
      3: return 120.0 * (1.0 + 0.8 * $cos(th)) * $cos(2.0 * PI * 120.0 * t);
      4: return 120.0 * $cos(2.0 * PI * 120.0 * t);
      default: return 10.0 * e * $cos(2.0 * PI * (5.0 + 3.0 * e) * t);
    endcase
  endfunction

  logic [3:0] mux_sel;
  int adc_q [NCH][$];     // ADC words per slot, oldest first, for the FIR model
  int smp_slot = 0;
  always @(posedge clk) begin
    cyc++;
    adc_valid <= 1'b0;
    if (afe_phi_clr) mux_sel = afe_addr_ch;
    if (afe_phi_smp) begin
      int code;
      code = 512 + $rtoi(electrode(int'(mux_sel), real'(cyc) / 256000.0) + 1000.5) - 1000;
      if (code < 0) code = 0;
      if (code > 1023) code = 1023;
      adc_valid <= 1'b1;
      adc_data  <= 10'(code);
      adc_q[smp_slot].push_back(code);
      smp_slot = (smp_slot + 1) % NCH;
    end
  end

  // ---------------- FIR reference for slot 0 ----------------
  int xh [$], yh [$], wh [$];
  int dec0 = 0;
  int n_fir = 0, n_fir0 = 0, n_band2 = 0;
  function automatic int rnd_sat(longint acc);
    longint r;
    r = (acc + 1024) >>> 11;
    if (r > 2047) r = 2047;
    if (r < -2048) r = -2048;
    return int'(r);
  endfunction
  function automatic int at(ref int q [$], input int k);
    return (k < q.size()) ? q[k] : 0;
  endfunction

  always @(posedge clk) if (rst_n && fir_valid) begin
    n_fir++;
    if (cfg.band_sel[fir_ch]) n_band2++;
    if (fir_ch == 0) begin
      longint acc;
      int lpf, b1, im;
      // bring in the four ADC words of this decimation group
      repeat (4) xh.push_front((adc_q[0].pop_front() - 512) * 4);
      acc = 0;
      for (int j = 0; j < 25; j++) acc += longint'(c_set[0][(j < 12) ? j : 24 - j]) * at(xh, j);
      lpf = rnd_sat(acc);
      yh.push_front(lpf);
      acc = 0;
      for (int j = 0; j < 42; j++) acc += longint'(c_set[1][(j < 21) ? j : 41 - j]) * at(yh, j);
      b1 = rnd_sat(acc);
      wh.push_front(b1);
      acc = 0;
      for (int j = 0; j < 15; j++)
        if (j < 7)      acc += longint'(c_set[3][j]) * at(wh, j);
        else if (j > 7) acc -= longint'(c_set[3][14 - j]) * at(wh, j);
      im = rnd_sat(acc);
      n_fir0++;
      chk(fir_lpf == sample_t'(lpf) && fir_bpf1 == sample_t'(b1) && fir_ht_im == sample_t'(im) &&
          fir_ht_re == sample_t'(at(wh, 7)),
          $sformatf("slot 0 FIR %0d %0d %0d %0d expected %0d %0d %0d %0d", fir_lpf, fir_bpf1,
                    fir_ht_re, fir_ht_im, lpf, b1, at(wh, 7), im));
    end else if (fir_ch != 0) begin
      repeat (4) void'(adc_q[fir_ch].pop_front());
    end
  end

  // ---------------- per-sample features ----------------
  int last_re [NCH], last_im [NCH];
  always @(posedge clk) if (rst_n && fir_valid) begin
    last_re[fir_ch] = int'(fir_ht_re);
    last_im[fir_ch] = int'(fir_ht_im);
  end
  always @(posedge clk) if (rst_n && smp_valid) begin
    int a, e, d, r, i;
    r = last_re[smp_ch]; i = last_im[smp_ch];
    a = (r < 0) ? -r : r;
    if (((i < 0) ? -i : i) > a) a = (i < 0) ? -i : i;
    chk(int'(f_amp[smp_ch]) == a, "amplitude");
    e = $rtoi($atan2(real'(i), real'(r)) * 512.0 / PI + 512.5) - 512;
    d = int'(f_phase[smp_ch]) - e;
    if (d > 512) d -= 1024;
    if (d < -512) d += 1024;
    chk((r == 0 && i == 0) || (d <= 1 && d >= -1), $sformatf("phase %0d exp %0d", f_phase[smp_ch], e));
  end

  // ---------------- windows ----------------
  int n_win = 0;
  always @(posedge clk) if (rst_n && win_valid) begin
    n_win++;
    if (n_win >= 2) begin
      chk(f_pair[0] > f_pair[1] + 100, $sformatf("PLV(0,1)=%0d vs PLV(0,2)=%0d", f_pair[0], f_pair[1]));
      chk(f_pair[0] > 300, $sformatf("PLV(0,1)=%0d", f_pair[0]));
      chk(f_pair[2] > 2 * f_pair[3], $sformatf("PAC(0->3)=%0d vs PAC(0->4)=%0d", f_pair[2], f_pair[3]));
      chk(f_se[0] > 4 * f_se[6], $sformatf("SE(0)=%0d SE(6)=%0d", f_se[0], f_se[6]));
    end
  end

  // ---------------- stimulation rules ----------------
  int prev_ph = 0, prev_prbs = 1;
  int since = 1023;
  bit prev_cmp = 1, cur_cmp, cur_cross, cur_trig, win_ok_d;
  int n_trig [4], n_capped = 0, n_blank = 0, n_cbpos = 0, n_pulse = 0, n_notrig_win = 0;
  bit expect_en = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      // the cycle after a selected-channel refresh
      chk(en_stim == (expect_en ? cfg.stim_ch_en : 4'b0), $sformatf("EN_STIM %b expected %b mode %0d", en_stim, expect_en, cfg.sel_mode));
      expect_en = 0;
      if (smp_valid && smp_ch == cfg.sel_fsmp[3:0]) begin
        int f, th;
        f  = int'(f_phase[cfg.sel_fsmp[3:0]]);
        th = cfg.sel_th ? int'($signed(prbs_th)) : int'(cfg.th_smp);
        cur_cmp   = f > th;
        cur_cross = cur_cmp && !prev_cmp && !(f - prev_ph > 512);
        case (cfg.sel_mode)
          MODE_SMP:     cur_trig = cur_cross;
          MODE_WIN:     cur_trig = win_ok;
          MODE_SMP_WIN: cur_trig = cur_cross && win_ok;
          default:      cur_trig = 0;
        endcase
        if (cur_trig && since < int'(cfg.min_interval)) begin n_capped++; cur_trig = 0; end
        if (cfg.sel_mode == MODE_SMP_WIN && cur_cross && !win_ok) n_notrig_win++;
        if (cur_trig) begin
          n_trig[cfg.sel_th ? 0 : int'(cfg.sel_mode)]++;
          since = 0;
        end else if (since < 1023) since++;
        expect_en = cur_trig;
        prev_cmp = cur_cmp; prev_ph = f;
      end
      if (afe_en_blk) n_blank++;
      if (stim_cb_pos != 0) n_cbpos++;
      if (stim_pos != 0 && stim_neg != 0) chk(0, "POS and NEG together");
    end
  end
  always @(posedge stim_pos[0]) n_pulse++;

  // ---------------- coefficient design ----------------
  function automatic real sinc(real x);
    return (x == 0.0) ? 1.0 : $sin(PI * x) / (PI * x);
  endfunction
  function automatic real hamm(int n, int len);
    return 0.54 - 0.46 * $cos(2.0 * PI * n / (len - 1));
  endfunction
  task automatic write_coef(int s, int i, real v);
    c_set[s][i] = $rtoi(v * 2048.0 + ((v >= 0) ? 0.5 : -0.5));
    @(posedge clk); #1;
    coef_we = 1; coef_addr = {2'(s), 5'(i)}; coef_wdata = coef_t'(c_set[s][i]);
    @(posedge clk); #1 coef_we = 0;
  endtask

  task automatic run_ms(int ms);
    repeat (ms * 256) @(posedge clk);
  endtask

  initial begin
    for (int s = 0; s < 4; s++) for (int i = 0; i < NLANE; i++) c_set[s][i] = 0;
    for (int k = 0; k < 4; k++) n_trig[k] = 0;
    cfg = '0;
    for (int s = 0; s < NCH; s++) cfg.ch_order[s] = 4'(s);
    cfg.ch_order[5] = 4'd0;                 // electrode 0 again, second band
    cfg.band_sel    = 16'h0038;             // slots 3, 4, 5 use BPF2
    cfg.blank_hold  = 8'd32;
    cfg.pair_a[0] = 0; cfg.pair_b[0] = 1;   // PLV 0-1
    cfg.pair_a[1] = 0; cfg.pair_b[1] = 2;   // PLV 0-2
    cfg.pair_a[2] = 0; cfg.pair_b[2] = 3; cfg.pair_pac[2] = 1;  // PAC 0->3
    cfg.pair_a[3] = 0; cfg.pair_b[3] = 4; cfg.pair_pac[3] = 1;  // PAC 0->4
    cfg.win_log2 = 2'd0;
    cfg.sel_fsmp = 5'd0; cfg.sel_fwin = 5'd0; cfg.sel_th = 0;
    cfg.sel_mode = MODE_OFF;
    cfg.th_smp = 13'sd256;
    cfg.th_win_l = 24'd200; cfg.th_win_h = 24'd600;
    cfg.min_interval = 10'd0;
    cfg.stim_ch_en = 4'b0011;
    cfg.pw = 6'd20; cfg.freq = 8'd0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    // LPF: 25 taps, cut-off 400 Hz at 4 kS/s
    for (int i = 0; i < 13; i++) write_coef(0, i, 2.0 * 0.1 * sinc(2.0 * 0.1 * (i - 12)) * hamm(i, 25));
    // BPF1: 25-55 Hz, BPF2: 90-150 Hz, 42 taps at 1 kS/s
    for (int i = 0; i < 21; i++) begin
      real m;
      m = i - 20.5;
      write_coef(1, i, 1.6 * (2.0 * 0.055 * sinc(2.0 * 0.055 * m) - 2.0 * 0.025 * sinc(2.0 * 0.025 * m)) * hamm(i, 42));
      write_coef(2, i, 1.6 * (2.0 * 0.150 * sinc(2.0 * 0.150 * m) - 2.0 * 0.090 * sinc(2.0 * 0.090 * m)) * hamm(i, 42));
    end
    // HT: 15 taps, h[k] = 2/(pi k) for odd k, lane i holds the tap k = i - 7
    for (int i = 0; i < 7; i++)
      write_coef(3, i, (((7 - i) % 2) == 1) ? -2.0 / (PI * (7 - i)) * hamm(i, 15) * 1.2 : 0.0);
    #1 enable = 1;
    run_ms(300);                           // settle, first window
    cfg.sel_mode = MODE_SMP;      run_ms(300);  // phase-locked
    cfg.min_interval = 10'd60;    run_ms(300);  // rate cap (40 Hz crossings, 16 Hz cap)
    cfg.min_interval = 10'd40;
    cfg.sel_mode = MODE_WIN;      run_ms(300);  // PLV inside 200..600
    cfg.sel_mode = MODE_SMP_WIN;  cfg.th_win_l = 24'd480; run_ms(300); // PLV out of range: no trigger
    cfg.th_win_l = 24'd200;       run_ms(300);  // in range
    cfg.sel_mode = MODE_SMP; cfg.sel_th = 1; cfg.min_interval = 10'd0; run_ms(300); // PRBS threshold
    $display("FIR outputs %0d (slot 0: %0d, second band: %0d), windows %0d", n_fir, n_fir0, n_band2, n_win);
    $display("triggers: prbs %0d, smp %0d, win %0d, smp&win %0d; capped %0d; blocked by window %0d",
             n_trig[0], n_trig[1], n_trig[2], n_trig[3], n_capped, n_notrig_win);
    $display("pulses ch0 %0d, blanking cycles %0d, active-CB cycles %0d", n_pulse, n_blank, n_cbpos);
    chk(n_fir0 > 0 && n_band2 > 0, "FIR decimation or second band never happened");
    chk(n_win >= 8, "too few windows");
    chk(n_trig[1] > 0, "phase-locked trigger never happened");
    chk(n_trig[2] > 0, "window-locked trigger never happened");
    chk(n_trig[3] > 0, "phase & window trigger never happened");
    chk(n_trig[0] > 0, "PRBS-threshold trigger never happened");
    chk(n_capped > 0, "rate cap never happened");
    chk(n_notrig_win > 0, "window gating never blocked a crossing");
    chk(n_blank > 0 && n_cbpos > 0 && n_pulse > 0, "pulse, blanking or active CB never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
