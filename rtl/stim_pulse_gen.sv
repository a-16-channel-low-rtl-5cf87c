// stim_pulse_gen -- pulse generator of the four-channel charge-balanced
// neurostimulator: turns stimulation triggers into the switch controls of
// each channel's H-bridge and charge-balancing circuits.
//
// Each channel runs its own sequence when its EN_STIM bit is seen while idle:
//   POS  (PW cycles)      first phase of the biphasic pulse (POS switches on)
//   NEG  (PW cycles)      second phase, opposite polarity, equal width
//   CB_A (CBA_CYC cycles) active charge balancing: the electrode residual is
//                         compared with +-V_SAFE off-chip; while CB_A is high
//                         cb_pos / cb_neg gate a small corrective current in
//                         the direction that reduces the residual
//   CB_P (CBP_CYC cycles) passive discharge of what is left
// While EN_STIM stays high the pulse repeats with a period of FREQ ms
// (FREQ * CLK_PER_MS cycles, counted from the start of the previous pulse);
// a one-cycle EN_STIM produces one pulse. PW = 0 disables the channel.
// EN_CP enables the shared charge pump while any channel drives current
// (POS, NEG, CB_A); stim_active, used for AFE blanking, is high from POS to
// the end of CB_P on any channel.
//
// Timing: outputs are registered; POS rises one cycle after EN_STIM.
// From the paper (Fig. 6, Sec. III-C): the EN_STIM (4b), PW (6b), FREQ (8b)
// and CLK inputs, the POS/NEG/CB_A/CB_P/EN_CP outputs, biphasic pulses of
// matched width, active CB against +-V_SAFE followed by passive discharge.
// This design's choices: the phase order and the absence of an interphase
// gap, PW in clock cycles, FREQ as a period in ms, the CB window lengths and
// the polarity of the corrective current.
module stim_pulse_gen
  import nc_pkg::*;
#(
  parameter int unsigned CLK_PER_MS = 256,  // 256 kHz clock
  parameter int unsigned CBA_CYC    = 64,   // 250 us active CB window
  parameter int unsigned CBP_CYC    = 256   // 1 ms passive discharge
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [NSTIM-1:0] en_stim,
  input  logic [5:0]       pw,
  input  logic [7:0]       freq,
  input  logic [NSTIM-1:0] cmp_hi,    // residual above +V_SAFE
  input  logic [NSTIM-1:0] cmp_lo,    // residual below -V_SAFE
  output logic [NSTIM-1:0] pos,
  output logic [NSTIM-1:0] neg,
  output logic [NSTIM-1:0] cb_a,
  output logic [NSTIM-1:0] cb_p,
  output logic [NSTIM-1:0] cb_pos,
  output logic [NSTIM-1:0] cb_neg,
  output logic             en_cp,
  output logic             stim_active
);

  typedef enum logic [2:0] {P_IDLE, P_POS, P_NEG, P_CBA, P_CBP} pstate_e;

  pstate_e     st  [NSTIM];
  logic [8:0]  cnt [NSTIM];
  logic [15:0] per [NSTIM];
  logic [15:0] period;

  assign period = 16'(freq) * 16'(CLK_PER_MS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < int'(NSTIM); c++) begin
        st[c]  <= P_IDLE;
        cnt[c] <= '0;
        per[c] <= '1;
      end
    end else begin
      for (int c = 0; c < int'(NSTIM); c++) begin
        if (per[c] != '1) per[c] <= per[c] + 16'd1;
        unique case (st[c])
          P_IDLE: if (en_stim[c] && pw != '0 && per[c] >= period) begin
            st[c]  <= P_POS;
            cnt[c] <= 9'(pw) - 9'd1;
            per[c] <= 16'd1;
          end
          P_POS: if (cnt[c] == '0) begin
            st[c]  <= P_NEG;
            cnt[c] <= 9'(pw) - 9'd1;
          end else cnt[c] <= cnt[c] - 9'd1;
          P_NEG: if (cnt[c] == '0) begin
            st[c]  <= P_CBA;
            cnt[c] <= 9'(CBA_CYC - 1);
          end else cnt[c] <= cnt[c] - 9'd1;
          P_CBA: if (cnt[c] == '0) begin
            st[c]  <= P_CBP;
            cnt[c] <= 9'(CBP_CYC - 1);
          end else cnt[c] <= cnt[c] - 9'd1;
          P_CBP: if (cnt[c] == '0) st[c] <= P_IDLE;
                 else cnt[c] <= cnt[c] - 9'd1;
          default: st[c] <= P_IDLE;
        endcase
      end
    end
  end

  always_comb begin
    en_cp       = 1'b0;
    stim_active = 1'b0;
    for (int c = 0; c < int'(NSTIM); c++) begin
      pos[c]    = (st[c] == P_POS);
      neg[c]    = (st[c] == P_NEG);
      cb_a[c]   = (st[c] == P_CBA);
      cb_p[c]   = (st[c] == P_CBP);
      cb_pos[c] = cb_a[c] && cmp_lo[c];
      cb_neg[c] = cb_a[c] && cmp_hi[c];
      en_cp       |= pos[c] | neg[c] | cb_a[c];
      stim_active |= (st[c] != P_IDLE);
    end
  end

  // The two H-bridge phases never overlap on a channel.
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) (pos & neg) == '0);

endmodule
