// pldbs_soc -- digital core of the 16-channel neural connectivity extraction
// and phase-locked deep brain stimulation SoC.
//
// Data flow: the AFE sequencer scans 16 logical channels through the shared
// integrator and 10-bit ADC at 4 kS/s each; the threefold FIR low-pass
// filters and decimates them to 1 kS/s, band-pass filters them and forms
// analytic pairs with a Hilbert transformer, all on one shared 21-lane
// multiplier chain; the connectivity extractor turns each pair into a phase
// (LPE) and an amplitude envelope and accumulates PLV/PAC of 8 channel pairs
// and SE of 16 channels over windows; the stimulation controller compares a
// selected per-sample feature and a selected windowed feature with thresholds
// and triggers the pulse generator of the four stimulator channels, whose
// activity also blanks the AFE.
//
// The analog parts (LNAs, multiplexer, integrator, ADC, charge pump, HV
// output stages and charge-balancing comparators) are outside this module:
// their digital controls and results are its ports. All settings come in as
// one configuration record (cfg) plus a write port for the FIR coefficients.
// Clock: one 256 kHz clock for the whole core (CLK_FIR of the paper).
module pldbs_soc
  import nc_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             enable,
  input  soc_cfg_t         cfg,
  // FIR coefficient memory write port
  input  logic             coef_we,
  input  logic [6:0]       coef_addr,
  input  coef_t            coef_wdata,
  // AFE and ADC
  output logic [3:0]       afe_addr_ch,
  output logic             afe_phi_clr,
  output logic             afe_phi_smp,
  output logic             afe_en_blk,
  input  logic             adc_valid,
  input  logic [ADC_W-1:0] adc_data,
  // stimulator output stages
  output logic [NSTIM-1:0] stim_pos,
  output logic [NSTIM-1:0] stim_neg,
  output logic [NSTIM-1:0] stim_cb_a,
  output logic [NSTIM-1:0] stim_cb_p,
  output logic [NSTIM-1:0] stim_cb_pos,
  output logic [NSTIM-1:0] stim_cb_neg,
  output logic             stim_en_cp,
  input  logic [NSTIM-1:0] cb_cmp_hi,
  input  logic [NSTIM-1:0] cb_cmp_lo,
  // read-out of filtered data and features
  output logic             fir_valid,
  output logic [3:0]       fir_ch,
  output sample_t          fir_lpf,
  output sample_t          fir_bpf1,
  output sample_t          fir_bpf2,
  output sample_t          fir_ht_re,
  output sample_t          fir_ht_im,
  output logic             smp_valid,
  output logic [3:0]       smp_ch,
  output phase_t           f_phase [NCH],
  output amp_t             f_amp   [NCH],
  output logic             win_valid,
  output fwin_t            f_pair  [NPAIR],
  output fwin_t            f_se    [NCH],
  output logic [NSTIM-1:0] en_stim,
  output logic             smp_event,
  output logic             win_ok,
  output logic [9:0]       prbs_th
);

  logic             seq_valid;
  logic [3:0]       seq_ch;
  logic [ADC_W-1:0] seq_data;
  logic             stim_active;
  fir_slot_e        slot;
  coef_t            coef [NLANE];

  afe_sequencer u_seq (
    .clk, .rst_n, .enable,
    .ch_order   (cfg.ch_order),
    .blank_hold (cfg.blank_hold),
    .stim_active(stim_active),
    .addr_ch    (afe_addr_ch),
    .phi_clr    (afe_phi_clr),
    .phi_smp    (afe_phi_smp),
    .en_blk     (afe_en_blk),
    .adc_valid  (adc_valid),
    .adc_data   (adc_data),
    .out_valid  (seq_valid),
    .out_ch     (seq_ch),
    .out_data   (seq_data)
  );

  fir_coeff_mem u_coef (
    .clk, .rst_n,
    .we   (coef_we),
    .addr (coef_addr),
    .wdata(coef_wdata),
    .slot (slot),
    .coef (coef)
  );

  threefold_fir u_fir (
    .clk, .rst_n,
    .adc_valid(seq_valid),
    .adc_ch   (seq_ch),
    .adc_data (seq_data),
    .band_sel (cfg.band_sel),
    .slot     (slot),
    .coef     (coef),
    .out_valid(fir_valid),
    .out_ch   (fir_ch),
    .d_lpf    (fir_lpf),
    .d_bpf1   (fir_bpf1),
    .d_bpf2   (fir_bpf2),
    .d_ht_re  (fir_ht_re),
    .d_ht_im  (fir_ht_im)
  );

  connectivity_extractor u_fe (
    .clk, .rst_n,
    .in_valid (fir_valid),
    .in_ch    (fir_ch),
    .re       (fir_ht_re),
    .im       (fir_ht_im),
    .pair_a   (cfg.pair_a),
    .pair_b   (cfg.pair_b),
    .pair_pac (cfg.pair_pac),
    .win_log2 (cfg.win_log2),
    .smp_valid(smp_valid),
    .smp_ch   (smp_ch),
    .phase    (f_phase),
    .amp      (f_amp),
    .win_valid(win_valid),
    .f_pair   (f_pair),
    .f_se     (f_se)
  );

  stim_controller u_ctrl (
    .clk, .rst_n,
    .smp_valid   (smp_valid),
    .smp_ch      (smp_ch),
    .phase       (f_phase),
    .amp         (f_amp),
    .win_valid   (win_valid),
    .f_pair      (f_pair),
    .f_se        (f_se),
    .sel_fsmp    (cfg.sel_fsmp),
    .sel_fwin    (cfg.sel_fwin),
    .sel_th      (cfg.sel_th),
    .sel_mode    (cfg.sel_mode),
    .th_smp      (cfg.th_smp),
    .th_win_h    (cfg.th_win_h),
    .th_win_l    (cfg.th_win_l),
    .min_interval(cfg.min_interval),
    .stim_ch_en  (cfg.stim_ch_en),
    .en_stim     (en_stim),
    .smp_event   (smp_event),
    .win_ok      (win_ok),
    .prbs_th     (prbs_th)
  );

  stim_pulse_gen u_pg (
    .clk, .rst_n,
    .en_stim    (en_stim),
    .pw         (cfg.pw),
    .freq       (cfg.freq),
    .cmp_hi     (cb_cmp_hi),
    .cmp_lo     (cb_cmp_lo),
    .pos        (stim_pos),
    .neg        (stim_neg),
    .cb_a       (stim_cb_a),
    .cb_p       (stim_cb_p),
    .cb_pos     (stim_cb_pos),
    .cb_neg     (stim_cb_neg),
    .en_cp      (stim_en_cp),
    .stim_active(stim_active)
  );

endmodule
