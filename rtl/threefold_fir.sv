// threefold_fir -- 16-channel LPF/decimator, band-pass filter and Hilbert
// transformer sharing one pre-add / multiply / add chain.
//
// Each logical channel owns three delay lines: a 25-tap LPF line fed by the
// ADC at 4 kS/s, a 42-tap BPF line fed by the decimated LPF output at 1 kS/s
// and a 15-tap HT line fed by the band-pass output at 1 kS/s. Every fourth
// ADC word of a channel starts a four-slot computation on the shared chain of
// NLANE (21) lanes, each lane being (a + b) * C_i:
//   slot LPF : a,b = L[i], L[24-i] (i < 12), lane 12 = L[12]        -> D_LPF
//   slot BPF1: a,b = B[i], B[41-i] with coefficient set BPF1       -> D_BPF1
//   slot BPF2: a,b = B[i], B[41-i] with coefficient set BPF2       -> D_BPF2
//   slot HT  : a,b = H[i], -H[14-i] (i < 7)                        -> D_HT,Im
// D_LPF is shifted into the BPF line at the end of the LPF slot, the band
// chosen by band_sel[ch] into the HT line at the end of the BPF2 slot, and
// D_HT,Re is the HT line's centre tap H[7] (the band-pass signal delayed by
// the transformer's group delay). LPF results of the three other ADC words are
// not computed at all (they would be discarded by the decimation).
//
// Timing: an ADC word that completes a decimation group (adc_valid) is followed
// by the four slots on the next four clock edges; out_valid pulses on the fourth
// with all results of that channel. ADC words must be at least four cycles
// apart (16 channels x 4 kS/s on a 256 kHz clock gives exactly four).
// Clock gating of each delay line is modelled by its write enable.
//
// From the paper: tap counts, decimation by 4, the 21 shared lanes with
// symmetric pre-addition (Fig. 3), the LPF/BPF1/BPF2/HT slot order, the
// Z7 tap as D_HT,Re, and per-line gating. This design's choices: the 12-bit
// data and Q1.11 coefficient widths, rounding and saturation of each result,
// the offset-binary to two's-complement ADC conversion with a x4 scale,
// skipping the discarded LPF outputs, and the meaning of BPF1/BPF2 as two
// coefficient sets over one BPF line with a per-channel choice of the band.
module threefold_fir
  import nc_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  // ADC stream, tagged with the logical channel
  input  logic            adc_valid,
  input  logic [3:0]      adc_ch,
  input  logic [ADC_W-1:0] adc_data,
  input  logic [NCH-1:0]  band_sel,
  // coefficient memory
  output fir_slot_e       slot,
  input  coef_t           coef [NLANE],
  // results
  output logic            out_valid,
  output logic [3:0]      out_ch,
  output sample_t         d_lpf,
  output sample_t         d_bpf1,
  output sample_t         d_bpf2,
  output sample_t         d_ht_re,
  output sample_t         d_ht_im
);

  localparam int unsigned ACC_W = DW + 1 + CW + 5;

  sample_t lpf_line [NCH][LPF_TAPS];
  sample_t bpf_line [NCH][BPF_TAPS];
  sample_t ht_line  [NCH][HT_TAPS];
  logic [1:0] dec_cnt [NCH];

  typedef enum logic [2:0] {S_IDLE, S_LPF, S_BPF1, S_BPF2, S_HT} state_e;
  state_e     state;
  logic [3:0] cur_ch;
  logic       start;

  // offset-binary ADC code to a signed sample, scaled into the DW-bit range
  sample_t adc_s;
  assign adc_s = sample_t'({~adc_data[ADC_W-1], adc_data[ADC_W-2:0], {(DW-ADC_W){1'b0}}});

  assign start = adc_valid && (dec_cnt[adc_ch] == 2'(DECIM - 1));

  // ---------------- shared pre-add / multiply / add chain ----------------
  logic signed [DW:0]      pa [NLANE];
  logic signed [DW:0]      pb [NLANE];
  logic signed [ACC_W-1:0] acc;
  logic signed [ACC_W-1:0] rnd;
  sample_t                 mac_out;

  always_comb begin
    for (int i = 0; i < int'(NLANE); i++) begin
      pa[i] = '0;
      pb[i] = '0;
    end
    unique case (slot)
      SLOT_LPF: begin
        for (int i = 0; i < int'(LPF_TAPS / 2); i++) begin
          pa[i] = (DW+1)'(lpf_line[cur_ch][i]);
          pb[i] = (DW+1)'(lpf_line[cur_ch][LPF_TAPS-1-i]);
        end
        pa[LPF_TAPS/2] = (DW+1)'(lpf_line[cur_ch][LPF_TAPS/2]);
      end
      SLOT_BPF1, SLOT_BPF2: begin
        for (int i = 0; i < int'(BPF_TAPS / 2); i++) begin
          pa[i] = (DW+1)'(bpf_line[cur_ch][i]);
          pb[i] = (DW+1)'(bpf_line[cur_ch][BPF_TAPS-1-i]);
        end
      end
      SLOT_HT: begin
        for (int i = 0; i < int'(HT_TAPS / 2); i++) begin
          pa[i] = (DW+1)'(ht_line[cur_ch][i]);
          pb[i] = -(DW+1)'(ht_line[cur_ch][HT_TAPS-1-i]);
        end
      end
    endcase
    acc = '0;
    for (int i = 0; i < int'(NLANE); i++)
      acc += (ACC_W'(pa[i]) + ACC_W'(pb[i])) * ACC_W'(coef[i]);
    rnd     = (acc + ACC_W'(1 << (CFRAC - 1))) >>> CFRAC;
    mac_out = sat_dw(32'(rnd));
  end

  always_comb begin
    unique case (state)
      S_BPF1:  slot = SLOT_BPF1;
      S_BPF2:  slot = SLOT_BPF2;
      S_HT:    slot = SLOT_HT;
      default: slot = SLOT_LPF;
    endcase
  end

  // ---------------- sequencing and gated delay lines ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cur_ch    <= '0;
      out_valid <= 1'b0;
      out_ch    <= '0;
      d_lpf     <= '0;
      d_bpf1    <= '0;
      d_bpf2    <= '0;
      d_ht_re   <= '0;
      d_ht_im   <= '0;
      for (int c = 0; c < int'(NCH); c++) begin
        dec_cnt[c] <= '0;
        for (int k = 0; k < int'(LPF_TAPS); k++) lpf_line[c][k] <= '0;
        for (int k = 0; k < int'(BPF_TAPS); k++) bpf_line[c][k] <= '0;
        for (int k = 0; k < int'(HT_TAPS);  k++) ht_line[c][k]  <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      // LPF line: gated to the channel of the incoming ADC word (4 kHz per channel)
      if (adc_valid) begin
        lpf_line[adc_ch][0] <= adc_s;
        for (int k = 1; k < int'(LPF_TAPS); k++) lpf_line[adc_ch][k] <= lpf_line[adc_ch][k-1];
        dec_cnt[adc_ch] <= dec_cnt[adc_ch] + 2'd1;
      end
      unique case (state)
        S_IDLE: if (start) begin
          state  <= S_LPF;
          cur_ch <= adc_ch;
        end
        S_LPF: begin
          d_lpf <= mac_out;
          // BPF line: gated, 1 kHz per channel
          bpf_line[cur_ch][0] <= mac_out;
          for (int k = 1; k < int'(BPF_TAPS); k++) bpf_line[cur_ch][k] <= bpf_line[cur_ch][k-1];
          state <= S_BPF1;
        end
        S_BPF1: begin
          d_bpf1 <= mac_out;
          state  <= S_BPF2;
        end
        S_BPF2: begin
          d_bpf2 <= mac_out;
          // HT line: gated, 1 kHz per channel
          ht_line[cur_ch][0] <= band_sel[cur_ch] ? mac_out : d_bpf1;
          for (int k = 1; k < int'(HT_TAPS); k++) ht_line[cur_ch][k] <= ht_line[cur_ch][k-1];
          state <= S_HT;
        end
        S_HT: begin
          d_ht_im   <= mac_out;
          d_ht_re   <= ht_line[cur_ch][HT_TAPS/2];
          out_ch    <= cur_ch;
          out_valid <= 1'b1;
          if (start) begin
            state  <= S_LPF;
            cur_ch <= adc_ch;
          end else begin
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A decimated ADC word may only start a computation when the chain is free.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> (state == S_IDLE || state == S_HT));

endmodule
