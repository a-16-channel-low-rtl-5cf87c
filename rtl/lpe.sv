// lpe -- Lightweight Phase Extractor: 10-bit instantaneous phase of an
// analytic pair (Re, Im) without CORDIC iterations.
//
// The arctangent is reduced to the octant [0, pi/4) and evaluated there from
// the ratio min(|Re|,|Im|) / max(|Re|,|Im|):
//   1. sign detection of Re and Im, absolute values, and a magnitude
//      comparator that decides which of the two is the denominator;
//   2. leading-zero detection on |Re| | |Im| and a common left shift
//      (bit scaling) so that the denominator's leading one sits at the MSB;
//   3. the top 9 bits of the denominator address a 2^8 x 9 reciprocal LUT,
//      recip[i] = floor((2^17 - 1) / (256 + i)), whose output is multiplied by
//      the top 9 bits of the numerator and shifted right by 9, giving the
//      ratio as an 8-bit fraction q (ratio ~ q / 256);
//   4. a 2^8 x 7 linearization LUT replaces the first-order estimate
//      ratio/4 (in units of pi) by the arctangent itself,
//      lin[q] = min(127, round(atan((q + 0.5) / 256) * 512 / pi));
//   5. the octant is undone by adding the fraction, with the sign chosen from
//      the region, to an offset of 0, +-1/2 or +-1 (in units of pi):
//        |Re|>=|Im|, Re>=0 : theta =  sign(Im) * f
//        |Re|>=|Im|, Re<0  : theta =  sign(Im) * (1 - f)
//        |Im|>|Re|,  Im>0  : theta =  1/2 - sign(Re) * f
//        |Im|>|Re|,  Im<0  : theta = -1/2 + sign(Re) * f
// The output is two's complement with pi = 512 (range [-pi, pi)); (0,0) gives 0.
//
// Timing: in_valid/re/im are registered as out_valid/phase one cycle later;
// a new pair may be accepted every cycle.
// From the paper (Fig. 4): the stage order, the region table, the 2^8 x 9
// and 2^8 x 7 LUT sizes, the 10-bit output. This design's choices: the
// 12-bit input width, taking the top 9 bits of numerator and denominator,
// the formulas of both LUTs, the saturation of q at 255 and the
// single-register pipeline. The LUTs are read-only tables filled at start-up
// from their formulas.
module lpe
  import nc_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  sample_t re,
  input  sample_t im,
  output logic    out_valid,
  output phase_t  phase
);

  localparam int unsigned MW = DW;  // magnitude width (|-2^(DW-1)| fits unsigned)

  logic [8:0] recip_lut [256];
  logic [6:0] lin_lut   [256];

  initial begin
    for (int i = 0; i < 256; i++) begin
      recip_lut[i] = 9'(((1 << 17) - 1) / (256 + i));
      lin_lut[i]   = 7'(($rtoi($atan((real'(i) + 0.5) / 256.0) * 512.0 / 3.14159265358979 + 0.5) > 127)
                        ? 127 : $rtoi($atan((real'(i) + 0.5) / 256.0) * 512.0 / 3.14159265358979 + 0.5));
    end
  end

  logic          re_neg, im_neg, re_ge_im;
  logic [MW-1:0] mag_re, mag_im, mag_or, sh_re, sh_im, num, den;
  logic [3:0]    lz;
  logic [17:0]   prod;
  logic [8:0]    q9;
  logic [7:0]    q;
  logic [6:0]    frac;
  phase_t        theta;

  // leading-zero count of a nonzero MW-bit value (returns MW-1 for zero)
  function automatic logic [3:0] lzc(input logic [MW-1:0] v);
    lzc = 4'(MW - 1);
    for (int k = 0; k < int'(MW); k++)
      if (v[k]) lzc = 4'(int'(MW) - 1 - k);
  endfunction

  always_comb begin
    // sign detection and absolute values
    re_neg = re[DW-1];
    im_neg = im[DW-1];
    mag_re = re_neg ? MW'(-re) : MW'(re);
    mag_im = im_neg ? MW'(-im) : MW'(im);
    // magnitude comparison
    re_ge_im = (mag_re >= mag_im);
    // leading-zero detection and bit scaling
    mag_or = mag_re | mag_im;
    lz     = lzc(mag_or);
    sh_re  = mag_re << lz;
    sh_im  = mag_im << lz;
    // numerator / denominator selection
    num = re_ge_im ? sh_im : sh_re;
    den = re_ge_im ? sh_re : sh_im;
    // reciprocal and multiplication
    prod = num[MW-1 -: 9] * recip_lut[den[MW-2 -: 8]];
    q9   = prod[17:9];
    q    = q9[8] ? 8'd255 : q9[7:0];
    // error correction
    frac = lin_lut[q];
    // range reconstruction: offset plus signed fraction
    if (mag_or == '0)
      theta = '0;
    else if (re_ge_im) begin
      if (!re_neg) theta = im_neg ? -phase_t'(frac) : phase_t'(frac);
      else         theta = im_neg ? phase_t'(-512) + phase_t'(frac) : phase_t'(512) - phase_t'(frac);
    end else begin
      if (!im_neg) theta = phase_t'(256) + (re_neg ? phase_t'(frac) : -phase_t'(frac));
      else         theta = phase_t'(-256) + (re_neg ? -phase_t'(frac) : phase_t'(frac));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      phase     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) phase <= theta;
    end
  end

endmodule
