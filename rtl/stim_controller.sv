// stim_controller -- event detector, threshold memory and multi-mode
// stimulation control.
//
// Per-sample path (F_SMP): SEL_FSMP picks one of the 16 phases or 16
// amplitude envelopes; it is evaluated whenever that channel's value is
// refreshed (1 kS/s). A comparator tests F_SMP > TH_SMP, where TH_SMP comes
// from the threshold memory or, for randomised phase locking, from the 10-bit
// PRBS (SEL_TH). The comparator output is ANDed with the inverse of its value
// at the previous evaluation (z^-1), so an event is the rising threshold
// crossing. A crossing caused by the phase wrapping from -pi to +pi (a jump
// of more than half a turn) is ignored.
// Windowed path (F_WIN): SEL_FWIN picks one of the 8 PLV/PAC values or one of
// the 16 SE values; at each new window the value is tested against the
// therapeutic range TH_WIN,L < F_WIN < TH_WIN,H (two comparators ANDed) and the
// result is held until the next window.
// Modes (SEL_MODE): 1) F_SMP-locked: trigger on a crossing; 2) F_WIN-locked:
// trigger at per-sample evaluations while F_WIN is in range; 3) both: trigger
// on a crossing while F_WIN is in range. A trigger is accepted only if at
// least min_interval evaluations have passed since the previous one, which
// caps the stimulation rate. An accepted trigger pulses EN_STIM on the
// enabled stimulator channels for one cycle and steps the PRBS.
//
// Timing: EN_STIM is registered, one cycle after the smp_valid that caused it.
// From the paper (Fig. 5(c), Sec. III-B, IV-C): the feature muxes, threshold
// sources, comparator polarities, the z^-1 crossing detector, the window range
// test and the three modes, the 10b PRBS, the rate cap and ignoring phase
// wrapping. This design's choices: the select encodings, evaluating F_SMP only
// on refreshes of the selected channel, holding the window result, the
// minimum-interval counter as the rate cap, one trigger driving a mask of
// stimulator channels, stepping the PRBS per trigger, and the reset value of
// the z^-1 register (1, so that no crossing is seen right after reset).
module stim_controller
  import nc_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  // features
  input  logic             smp_valid,
  input  logic [3:0]       smp_ch,
  input  phase_t           phase  [NCH],
  input  amp_t             amp    [NCH],
  input  logic             win_valid,
  input  fwin_t            f_pair [NPAIR],
  input  fwin_t            f_se   [NCH],
  // configuration (selects and threshold memory)
  input  logic [4:0]       sel_fsmp,
  input  logic [4:0]       sel_fwin,
  input  logic             sel_th,
  input  stim_mode_e       sel_mode,
  input  fsmp_t            th_smp,
  input  fwin_t            th_win_h,
  input  fwin_t            th_win_l,
  input  logic [9:0]       min_interval,
  input  logic [NSTIM-1:0] stim_ch_en,
  // outputs
  output logic [NSTIM-1:0] en_stim,
  output logic             smp_event,   // a (non-wrap) rising crossing was seen
  output logic             win_ok,      // F_WIN inside the therapeutic range
  output logic [9:0]       prbs_th      // current random threshold
);

  // ---------------- feature multiplexers ----------------
  logic  tick;
  fsmp_t f_smp, th, f_prev;
  fwin_t f_win;
  logic  cmp, cmp_z1, wrap, crossing, allowed, trig;
  logic [9:0] since;
  logic signed [FSMP_W:0] step;

  assign tick  = smp_valid && (smp_ch == sel_fsmp[3:0]);
  assign f_smp = sel_fsmp[4] ? fsmp_t'({1'b0, amp[sel_fsmp[3:0]]})
                             : fsmp_t'(phase[sel_fsmp[3:0]]);

  always_comb begin
    if (sel_fwin < 5'(NPAIR))             f_win = f_pair[sel_fwin[2:0]];
    else if (sel_fwin < 5'(NPAIR + NCH)) f_win = f_se[4'(sel_fwin - 5'(NPAIR))];
    else                                 f_win = '0;
  end

  // ---------------- event detector ----------------
  prbs_gen u_prbs (.clk, .rst_n, .advance(trig), .value(prbs_th));

  assign th      = sel_th ? fsmp_t'($signed(prbs_th)) : th_smp;
  assign cmp     = (f_smp > th);
  assign step    = (FSMP_W+1)'(f_smp) - (FSMP_W+1)'(f_prev);
  assign wrap    = !sel_fsmp[4] && (step > (FSMP_W+1)'(1 << (PH_W - 1)));
  assign crossing   = cmp && !cmp_z1 && !wrap;
  assign allowed = (since >= min_interval);

  always_comb begin
    unique case (sel_mode)
      MODE_SMP:     trig = tick && allowed && crossing;
      MODE_WIN:     trig = tick && allowed && win_ok;
      MODE_SMP_WIN: trig = tick && allowed && crossing && win_ok;
      default:      trig = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmp_z1    <= 1'b1;
      f_prev    <= '0;
      win_ok    <= 1'b0;
      since     <= '1;
      en_stim   <= '0;
      smp_event <= 1'b0;
    end else begin
      en_stim   <= trig ? stim_ch_en : '0;
      smp_event <= tick && crossing;
      if (tick) begin
        cmp_z1 <= cmp;
        f_prev <= f_smp;
        if (trig)            since <= '0;
        else if (since != '1) since <= since + 10'd1;
      end
      if (win_valid) win_ok <= (f_win < th_win_h) && (f_win > th_win_l);
    end
  end

endmodule
