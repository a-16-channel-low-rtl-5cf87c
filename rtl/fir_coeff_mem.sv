// fir_coeff_mem -- programmable coefficient memory of the threefold FIR with
// the slot multiplexer that feeds the shared multiplier chain.
//
// Four coefficient sets are stored: LPF (13 unique coefficients of the
// symmetric 25-tap filter), BPF1 and BPF2 (21 unique coefficients each of a
// symmetric 42-tap filter) and HT (7 unique coefficients of the antisymmetric
// 15-tap Hilbert transformer). For the slot being computed the multiplexer
// presents the whole set as C0..C20 to the 21 lanes; lanes past the end of a
// shorter set read zero, so those lanes contribute nothing (data gating).
//
// Interface: a host writes one coefficient per cycle (we, addr = {set[1:0],
// index[4:0]}, wdata); writes to an index beyond the set's length are
// ignored. The read side is combinational from `slot`.
// The sets, the lane count and the coefficient memory + MUX structure follow
// Fig. 3 of the paper; the address map, the 12-bit Q1.11 coefficient format
// and the reset-to-zero are this design's choices.
module fir_coeff_mem
  import nc_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           we,
  input  logic [6:0]     addr,
  input  coef_t          wdata,
  input  fir_slot_e      slot,
  output coef_t          coef [NLANE]
);

  // number of unique coefficients in each set
  function automatic int unsigned set_len(input logic [1:0] s);
    case (s)
      2'd0:    return (LPF_TAPS + 1) / 2;  // 13
      2'd3:    return (HT_TAPS - 1) / 2;   // 7 (the centre tap of a Hilbert FIR is 0)
      default: return BPF_TAPS / 2;        // 21
    endcase
  endfunction

  coef_t mem [4][NLANE];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < 4; s++)
        for (int i = 0; i < int'(NLANE); i++) mem[s][i] <= '0;
    end else if (we && (int'(addr[4:0]) < int'(set_len(addr[6:5])))) begin
      mem[addr[6:5]][addr[4:0]] <= wdata;
    end
  end

  always_comb begin
    for (int i = 0; i < int'(NLANE); i++)
      coef[i] = (i < int'(set_len(slot))) ? mem[slot][i] : '0;
  end

endmodule
