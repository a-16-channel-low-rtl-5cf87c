// afe_sequencer -- digital control of the shared AFE back end: channel
// multiplexing in a programmable order, integrator phase timing, tagging of
// ADC words, and input blanking during stimulation.
//
// The 16 LNA outputs share one programmable-gain integrator and one 10-bit
// SAR ADC. The sequencer walks through 16 logical channel slots; slot s
// addresses electrode ch_order[s] on the 16:1 multiplexer (Addr_CH), so any
// order is possible and one electrode may occupy several slots (for example to
// be band-pass filtered in two bands). Each slot lasts SLOT_CYC clock cycles:
//   cycle 0             phi_clr : integrator reset, multiplexer switched
//   cycles 1..SLOT_CYC-2         integration
//   cycle SLOT_CYC-1    phi_smp : ADC samples the integrator output
// With SLOT_CYC = 4 and a 256 kHz clock every channel is sampled at 4 kS/s.
// The ADC word that returns (adc_valid) is tagged with the slot of the last
// phi_smp and forwarded as (out_valid, out_ch, out_data).
// Blanking: en_blk is high while the stimulator is active and for blank_hold
// further cycles; the AFE then turns its input chopper off and resets its
// input.
//
// Timing: addr_ch, phi_clr and phi_smp are registered; out_* follow
// adc_valid by one cycle.
// From the paper (Sec. III-A, Fig. 2): the shared integrator and ADC,
// the 16:1 multiplexer with a user-defined order, phi_CLR/phi_SMP, blanking
// on stimulation. This design's choices: the slot length and the placement of
// the phases within it, the tag register and the blanking hold time.
module afe_sequencer
  import nc_pkg::*;
#(
  parameter int unsigned SLOT_CYC = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                enable,
  input  logic [NCH-1:0][3:0] ch_order,
  input  logic [7:0]          blank_hold,
  input  logic                stim_active,
  // AFE / ADC side
  output logic [3:0]          addr_ch,
  output logic                phi_clr,
  output logic                phi_smp,
  output logic                en_blk,
  input  logic                adc_valid,
  input  logic [ADC_W-1:0]    adc_data,
  // to the FIR
  output logic                out_valid,
  output logic [3:0]          out_ch,
  output logic [ADC_W-1:0]    out_data
);

  logic [$clog2(SLOT_CYC)-1:0] cyc;
  logic [3:0] slot, conv_slot;
  logic [7:0] hold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc       <= '0;
      slot      <= '0;
      conv_slot <= '0;
      addr_ch   <= '0;
      phi_clr   <= 1'b0;
      phi_smp   <= 1'b0;
      out_valid <= 1'b0;
      out_ch    <= '0;
      out_data  <= '0;
      hold      <= '0;
      en_blk    <= 1'b0;
    end else begin
      phi_clr   <= 1'b0;
      phi_smp   <= 1'b0;
      out_valid <= 1'b0;
      if (enable) begin
        if (cyc == '0) begin
          addr_ch <= ch_order[slot];
          phi_clr <= 1'b1;
        end
        if (cyc == ($clog2(SLOT_CYC))'(SLOT_CYC - 1)) begin
          phi_smp   <= 1'b1;
          conv_slot <= slot;
          cyc       <= '0;
          slot      <= slot + 4'd1;
        end else begin
          cyc <= cyc + 1'b1;
        end
      end else begin
        cyc  <= '0;
        slot <= '0;
      end
      if (adc_valid) begin
        out_valid <= 1'b1;
        out_ch    <= conv_slot;
        out_data  <= adc_data;
      end
      // blanking
      if (stim_active)    hold <= blank_hold;
      else if (hold != 0) hold <= hold - 8'd1;
      en_blk <= stim_active || (hold != 0);
    end
  end

endmodule
