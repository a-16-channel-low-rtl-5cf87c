// prbs_gen -- 10-bit pseudo-random binary sequence used as a random phase
// threshold for randomised phase locking.
//
// A Fibonacci LFSR with the primitive polynomial x^10 + x^7 + 1 steps once per
// `advance` pulse and so visits all 1023 nonzero states before repeating. The
// register value, read as a signed 10-bit number, is a phase threshold
// uniformly spread over [-pi, pi) (pi = 512); the all-zero state is excluded.
//
// Interface and timing: `value` is the register itself; it changes on the
// clock edge after `advance`. Reset loads SEED (nonzero).
// The paper gives the generator's width (10 bits) and purpose; the polynomial,
// the seed and advancing once per stimulation trigger are this design's
// choices.
module prbs_gen #(
  parameter logic [9:0] SEED = 10'h001
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       advance,
  output logic [9:0] value
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       value <= (SEED == '0) ? 10'h001 : SEED;
    else if (advance) value <= {value[8:0], value[9] ^ value[6]};
  end

endmodule
