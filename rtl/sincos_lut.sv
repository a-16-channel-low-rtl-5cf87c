// sincos_lut -- sine and cosine of a 10-bit normalised phase (pi = 512).
//
// A single quarter-wave table of 2^8 entries, qtr[k] = round(511 * sin(k*pi/512)),
// serves both outputs: the two top phase bits pick the quadrant, the low
// eight bits index the table directly or mirrored (256 - k), and the result
// is negated where the function is negative. The entry for a quarter turn
// (k = 256, value 511) is not stored but selected when the mirrored index
// wraps to zero.
//
// Interface and timing: purely combinational, phase in, sin/cos out as
// signed Q0.9 values in [-511, 511].
// The paper shows a "sin & cos LUT" feeding the PLV/PAC accumulators
// (Fig. 5(a)); its size, output format and quarter-wave organisation are this
// design's choices.
module sincos_lut
  import nc_pkg::*;
(
  input  phase_t                    phase,
  output logic signed [TRIG_W:0]    sin_o,
  output logic signed [TRIG_W:0]    cos_o
);

  logic [TRIG_W-1:0] qtr [256];

  initial begin
    for (int k = 0; k < 256; k++)
      qtr[k] = TRIG_W'($rtoi(511.0 * $sin(3.14159265358979 * real'(k) / 512.0) + 0.5));
  end

  // sin of the first quadrant for an index 0..256
  function automatic logic [TRIG_W-1:0] q1(input logic [8:0] k);
    return k[8] ? TRIG_W'(511) : qtr[k[7:0]];
  endfunction

  logic [1:0] quad;
  logic [7:0] idx;
  logic [TRIG_W-1:0] s_mag, c_mag;

  always_comb begin
    quad  = phase[PH_W-1 -: 2];
    idx   = phase[7:0];
    // within a quadrant the phase is idx; sin(idx) and cos(idx) = sin(256 - idx)
    if (quad[0] == 1'b0) begin
      s_mag = q1({1'b0, idx});
      c_mag = q1(9'd256 - {1'b0, idx});
    end else begin
      s_mag = q1(9'd256 - {1'b0, idx});
      c_mag = q1({1'b0, idx});
    end
    // quadrants of the two's-complement phase: 00 [0,pi/2), 01 [pi/2,pi),
    // 10 [-pi,-pi/2), 11 [-pi/2,0)
    unique case (quad)
      2'b00: begin sin_o =  (TRIG_W+1)'(s_mag); cos_o =  (TRIG_W+1)'(c_mag); end
      2'b01: begin sin_o =  (TRIG_W+1)'(s_mag); cos_o = -(TRIG_W+1)'(c_mag); end
      2'b10: begin sin_o = -(TRIG_W+1)'(s_mag); cos_o = -(TRIG_W+1)'(c_mag); end
      default: begin sin_o = -(TRIG_W+1)'(s_mag); cos_o = (TRIG_W+1)'(c_mag); end
    endcase
  end

endmodule
