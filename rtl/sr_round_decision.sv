// sr_round_decision: decides whether the truncated result is rounded up.
//
// Stochastic rounding adds a random number to the residual and uses only the
// carry out (c_out): the carry is 1 with probability residual / 2^k, which is the
// rounding-up probability of stochastic rounding. Round to nearest uses the
// residual's top bit instead (ties round up), so the same result adder serves
// both modes. The multiplexer encoding (1 = nearest, 0 = stochastic) is the one
// printed on the paper's diagram. SR_BITS sets the width of the random-number
// adder (the paper evaluates 8, 16 and 32; 32 is its main version). With fewer
// than 32 bits, the top SR_BITS bits of the residual meet the low SR_BITS bits
// of the random word, which is this design's choice. Purely combinational.
module sr_round_decision #(
  parameter int unsigned SR_BITS = 32
) (
  input  logic [31:0]        residual_i,
  input  logic [SR_BITS-1:0] rand_i,
  input  logic               round_mode_i,
  output logic               round_up_o
);

  logic [SR_BITS:0] rsum;
  logic             c_out;

  always_comb begin
    rsum       = {1'b0, residual_i[31 -: SR_BITS]} + {1'b0, rand_i};
    c_out      = rsum[SR_BITS];
    round_up_o = round_mode_i ? residual_i[31] : c_out;
  end

  initial begin
    assert (SR_BITS >= 1 && SR_BITS <= 32)
      else $error("SR_BITS must be 1..32");
  end

endmodule
