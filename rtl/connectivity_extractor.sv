// connectivity_extractor -- per-sample phase and amplitude envelope of 16
// channels and windowed PLV / PAC of 8 channel pairs and spectral energy (SE)
// of 16 channels.
//
// Per sample: each analytic pair (Re, Im) from the FIR is converted to a phase
// by one shared LPE and to an amplitude envelope by the l_inf norm
// A = max(|Re|, |Im|). The latest phase and amplitude of every channel are held
// in registers and offered to the stimulation controller (F_SMP features).
//
// Per window: when the last logical channel (15) of a 1 kHz frame has been
// converted, all 16 phases and amplitudes are copied into a frame snapshot and
// a sequencer visits the 8 pairs, one per clock, through one sin & cos LUT and
// two multipliers:
//   PLV pair (a,b): S += sin(theta_a - theta_b),  C += cos(theta_a - theta_b)
//   PAC pair (a,b): S += A_b * sin(theta_a),      C += A_b * cos(theta_a)
// so that the phase of channel a is coupled with the amplitude of channel b.
// SE accumulates Re^2 of every channel. After N = 256 << win_log2 frames the
// window closes: the complex sum's magnitude is approximated by the l_inf norm
// max(|S|, |C|) and normalised by N (PLV: 511 = 1.0; PAC: amplitude units,
// sin/cos scale removed), SE is the mean of Re^2, and win_valid pulses.
//
// Timing: smp_valid/smp_ch pulse two cycles after in_valid, when the channel's
// phase/amplitude registers hold the new values. The pair sequencer takes 9
// cycles after the frame's last channel; input samples must be at least 4
// cycles apart. The window outputs hold their values until the next window.
// From the paper: LPE phase, l_inf amplitude and l_inf magnitude, the shared
// sin & cos LUT and two multipliers selected by PLV/PAC mode (Fig. 5(a)),
// 8 pairs from any channel combination, 16 phases, 16 amplitudes and 16 SE
// values, window rate of 1-4 Hz. This design's choices: power-of-two windows
// (256..2048 samples), SE as the mean square of the band-pass signal, the
// output scaling, the frame snapshot and the sequential pair processing.
module connectivity_extractor
  import nc_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // analytic pairs from the FIR
  input  logic                  in_valid,
  input  logic [3:0]            in_ch,
  input  sample_t               re,
  input  sample_t               im,
  // configuration
  input  logic [NPAIR-1:0][3:0] pair_a,
  input  logic [NPAIR-1:0][3:0] pair_b,
  input  logic [NPAIR-1:0]      pair_pac,
  input  logic [1:0]            win_log2,
  // per-sample features
  output logic                  smp_valid,
  output logic [3:0]            smp_ch,
  output phase_t                phase [NCH],
  output amp_t                  amp   [NCH],
  // windowed features
  output logic                  win_valid,
  output fwin_t                 f_pair [NPAIR],
  output fwin_t                 f_se   [NCH]
);

  localparam int unsigned ACC_W  = 36;
  localparam int unsigned PROD_W = AMP_W + TRIG_W + 2;

  // ---------------- per-sample: LPE and l_inf amplitude ----------------
  logic   lpe_valid;
  phase_t lpe_phase;
  logic [3:0] ch_d;
  amp_t   amp_d;
  amp_t   amp_in;
  sample_t abs_re, abs_im;

  assign abs_re = re[DW-1] ? -re : re;
  assign abs_im = im[DW-1] ? -im : im;
  assign amp_in = (amp_t'(abs_re) >= amp_t'(abs_im)) ? amp_t'(abs_re) : amp_t'(abs_im);

  lpe u_lpe (
    .clk, .rst_n,
    .in_valid (in_valid),
    .re       (re),
    .im       (im),
    .out_valid(lpe_valid),
    .phase    (lpe_phase)
  );

  // ---------------- window bookkeeping ----------------
  logic [10:0] frame_cnt;
  logic [10:0] win_last;
  assign win_last = 11'((256 << win_log2) - 1);

  // ---------------- spectral energy ----------------
  logic signed [2*DW-1:0] sq;
  logic [ACC_W-1:0]       se_acc [NCH];
  logic                   se_close;
  assign sq       = re * re;
  assign se_close = in_valid && (in_ch == 4'(NCH - 1)) && (frame_cnt == win_last);

  function automatic fwin_t sat_fwin(input logic [ACC_W-1:0] v);
    return (|v[ACC_W-1:FWIN_W]) ? '1 : v[FWIN_W-1:0];
  endfunction

  // ---------------- pair sequencer ----------------
  phase_t snap_phase [NCH];
  amp_t   snap_amp   [NCH];
  logic   seq_busy, seq_latch, last_frame;
  logic [2:0] pidx;
  logic signed [ACC_W-1:0] acc_s [NPAIR];
  logic signed [ACC_W-1:0] acc_c [NPAIR];

  phase_t theta_a, theta_b, arg;
  amp_t   amp_b;
  logic signed [TRIG_W:0] s_v, c_v;
  logic signed [PROD_W-1:0] term_s, term_c;

  always_comb begin
    theta_a = snap_phase[pair_a[pidx]];
    theta_b = snap_phase[pair_b[pidx]];
    amp_b   = snap_amp[pair_b[pidx]];
    arg     = pair_pac[pidx] ? theta_a : phase_t'(theta_a - theta_b);
  end

  sincos_lut u_sincos (.phase(arg), .sin_o(s_v), .cos_o(c_v));

  always_comb begin
    if (pair_pac[pidx]) begin
      term_s = PROD_W'(s_v) * $signed({1'b0, amp_b});
      term_c = PROD_W'(c_v) * $signed({1'b0, amp_b});
    end else begin
      term_s = PROD_W'(s_v);
      term_c = PROD_W'(c_v);
    end
  end

  // l_inf magnitude of a complex sum
  function automatic logic [ACC_W-1:0] linf(input logic signed [ACC_W-1:0] a,
                                            input logic signed [ACC_W-1:0] b);
    logic [ACC_W-1:0] ma, mb;
    ma = a[ACC_W-1] ? ACC_W'(-a) : ACC_W'(a);
    mb = b[ACC_W-1] ? ACC_W'(-b) : ACC_W'(b);
    return (ma >= mb) ? ma : mb;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ch_d       <= '0;
      amp_d      <= '0;
      smp_valid  <= 1'b0;
      smp_ch     <= '0;
      win_valid  <= 1'b0;
      frame_cnt  <= '0;
      seq_busy   <= 1'b0;
      seq_latch  <= 1'b0;
      last_frame <= 1'b0;
      pidx       <= '0;
      for (int c = 0; c < int'(NCH); c++) begin
        phase[c]      <= '0;
        amp[c]        <= '0;
        snap_phase[c] <= '0;
        snap_amp[c]   <= '0;
        se_acc[c]     <= '0;
        f_se[c]       <= '0;
      end
      for (int p = 0; p < int'(NPAIR); p++) begin
        acc_s[p]  <= '0;
        acc_c[p]  <= '0;
        f_pair[p] <= '0;
      end
    end else begin
      smp_valid <= 1'b0;
      win_valid <= 1'b0;
      if (in_valid) begin
        ch_d  <= in_ch;
        amp_d <= amp_in;
      end
      // SE accumulation and window close
      if (se_close) begin
        for (int c = 0; c < int'(NCH); c++) begin
          f_se[c]   <= sat_fwin((se_acc[c] + ((c == int'(NCH) - 1) ? ACC_W'(sq) : '0)) >> (8 + win_log2));
          se_acc[c] <= '0;
        end
      end else if (in_valid) begin
        se_acc[in_ch] <= se_acc[in_ch] + ACC_W'(sq);
      end
      // per-sample feature registers
      if (lpe_valid) begin
        phase[ch_d] <= lpe_phase;
        amp[ch_d]   <= amp_d;
        smp_valid   <= 1'b1;
        smp_ch      <= ch_d;
        if (ch_d == 4'(NCH - 1)) begin
          for (int c = 0; c < int'(NCH) - 1; c++) begin
            snap_phase[c] <= phase[c];
            snap_amp[c]   <= amp[c];
          end
          snap_phase[NCH-1] <= lpe_phase;
          snap_amp[NCH-1]   <= amp_d;
          last_frame <= (frame_cnt == win_last);
          frame_cnt  <= (frame_cnt == win_last) ? '0 : frame_cnt + 11'd1;
          seq_busy   <= 1'b1;
          pidx       <= '0;
        end
      end
      // pair accumulation, one pair per cycle
      if (seq_busy) begin
        acc_s[pidx] <= acc_s[pidx] + ACC_W'(term_s);
        acc_c[pidx] <= acc_c[pidx] + ACC_W'(term_c);
        pidx <= pidx + 3'd1;
        if (pidx == 3'(NPAIR - 1)) begin
          seq_busy  <= 1'b0;
          seq_latch <= last_frame;
        end
      end
      // window close: l_inf magnitude, normalisation, restart
      if (seq_latch) begin
        seq_latch <= 1'b0;
        win_valid <= 1'b1;
        for (int p = 0; p < int'(NPAIR); p++) begin
          f_pair[p] <= sat_fwin(linf(acc_s[p], acc_c[p]) >> (8 + win_log2 + (pair_pac[p] ? TRIG_W : 0)));
          acc_s[p]  <= '0;
          acc_c[p]  <= '0;
        end
      end
    end
  end

  a_seq_free: assert property (@(posedge clk) disable iff (!rst_n)
    (lpe_valid && ch_d == 4'(NCH - 1)) |-> !seq_busy);

endmodule
