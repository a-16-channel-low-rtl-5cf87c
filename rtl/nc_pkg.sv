// nc_pkg -- shared constants, types and configuration record of the
// phase-locked DBS digital core.
//
// Channel counts (16 recording, 8 pairs, 4 stimulation), the 10-bit ADC and
// 10-bit phase, the filter lengths (25/42/15 taps) and the 21-lane shared
// multiplier chain follow the paper. Data, coefficient and feature widths,
// the feature-select encodings and the layout of the configuration record are
// this design's own choices.
package nc_pkg;

  // ---------------- sizes given by the paper ----------------
  localparam int unsigned NCH     = 16;  // recording channels
  localparam int unsigned NPAIR   = 8;   // PLV/PAC channel pairs
  localparam int unsigned NSTIM   = 4;   // stimulation channels
  localparam int unsigned ADC_W   = 10;  // SAR ADC resolution
  localparam int unsigned PH_W    = 10;  // LPE phase width (pi == 2^(PH_W-1))
  localparam int unsigned LPF_TAPS = 25;
  localparam int unsigned BPF_TAPS = 42;
  localparam int unsigned HT_TAPS  = 15;
  localparam int unsigned NLANE    = 21; // shared pre-add/multiply lanes (C0..C20)
  localparam int unsigned DECIM    = 4;  // LPF decimation factor

  // ---------------- this design's choices ----------------
  localparam int unsigned DW      = 12;  // FIR sample width (signed)
  localparam int unsigned CW      = 12;  // FIR coefficient width (signed Q1.11)
  localparam int unsigned CFRAC   = 11;  // fractional bits of a coefficient
  localparam int unsigned AMP_W   = DW;  // l_inf amplitude width (unsigned)
  localparam int unsigned TRIG_W  = 9;   // sin/cos amplitude (Q0.9, +-511)
  localparam int unsigned FWIN_W  = 24;  // windowed feature width (PLV, PAC, SE)
  localparam int unsigned FSMP_W  = 13;  // per-sample feature width (signed)

  typedef logic signed [DW-1:0]   sample_t;
  typedef logic signed [CW-1:0]   coef_t;
  typedef logic signed [PH_W-1:0] phase_t;
  typedef logic        [AMP_W-1:0] amp_t;
  typedef logic        [FWIN_W-1:0] fwin_t;
  typedef logic signed [FSMP_W-1:0] fsmp_t;

  // FIR slots of the shared multiplier chain (Fig. 3 timing: LPF, BPF1, BPF2, HT)
  typedef enum logic [1:0] {SLOT_LPF = 2'd0, SLOT_BPF1 = 2'd1, SLOT_BPF2 = 2'd2, SLOT_HT = 2'd3} fir_slot_e;

  // Stimulation modes of Fig. 5(c)
  typedef enum logic [1:0] {
    MODE_OFF      = 2'd0,
    MODE_SMP      = 2'd1,  // F_SMP-locked
    MODE_WIN      = 2'd2,  // F_WIN-locked
    MODE_SMP_WIN  = 2'd3   // F_SMP & F_WIN-locked
  } stim_mode_e;

  // Programmable settings of the core. Written by the host as one record.
  typedef struct packed {
    // AFE sequencer
    logic [NCH-1:0][3:0]   ch_order;    // electrode address of each logical channel slot
    logic [7:0]            blank_hold;  // extra blanking cycles after a stimulus
    // threefold FIR
    logic [NCH-1:0]        band_sel;    // 0: BPF1 feeds the HT, 1: BPF2 feeds the HT
    // connectivity extractor
    logic [NPAIR-1:0][3:0] pair_a;      // phase channel of pair p
    logic [NPAIR-1:0][3:0] pair_b;      // second phase channel (PLV) / amplitude channel (PAC)
    logic [NPAIR-1:0]      pair_pac;    // 0: PLV, 1: PAC
    logic [1:0]            win_log2;    // window = 256 << win_log2 samples
    // stimulation control
    logic [4:0]            sel_fsmp;    // 0..15 phase of ch, 16..31 amplitude of ch-16
    logic [4:0]            sel_fwin;    // 0..7 PLV/PAC of pair, 8..23 SE of ch-8
    logic                  sel_th;      // 0: TH_SMP from threshold memory, 1: PRBS
    stim_mode_e            sel_mode;
    logic signed [FSMP_W-1:0] th_smp;
    logic [FWIN_W-1:0]     th_win_h;
    logic [FWIN_W-1:0]     th_win_l;
    logic [9:0]            min_interval; // minimum samples between triggers
    logic [NSTIM-1:0]      stim_ch_en;   // stimulator channels driven by a trigger
    // pulse generator
    logic [5:0]            pw;           // phase width in clock cycles
    logic [7:0]            freq;         // repetition period in ms while EN_STIM is held
  } soc_cfg_t;

  // Saturate a wide signed value to DW bits.
  function automatic sample_t sat_dw(input logic signed [31:0] v);
    if (v > 32'sd2047)       return sample_t'(12'sh7FF);
    else if (v < -32'sd2048) return sample_t'(12'sh800);
    else                     return sample_t'(v[DW-1:0]);
  endfunction

endpackage
