// sr_overflow_detect: compares the unrounded value with the output ranges.
//
// The unrounded value is U = {above_i, unrounded_i}. For a 32-bit result it is
// out of range when the 32 bits above it are not a plain extension of the
// result's top bit (signed) or not all zero (unsigned); the 16-bit flags do the
// same with the 48 bits above bit 15. The paper gives this block's 4-bit output
// but not the meaning of the bits; the flag layout of sr_pkg::ovf_t is this
// design's choice. Overflow made by the round-up itself (U equal to the maximum)
// is left to the saturation stage, which sees the rounding adder's output.
// Only bits 31:15 of the unrounded result matter here.
// Purely combinational.
module sr_overflow_detect
  import sr_pkg::*;
(
  input  logic [31:0] above_i,
  input  logic [31:0] unrounded_i,
  input  logic        signed_i,
  output ovf_t        ovf_o
);

  logic        neg;
  logic [47:0] above16;

  always_comb begin
    neg     = signed_i & above_i[31];
    above16 = {above_i, unrounded_i[31:16]};
    if (signed_i) begin
      ovf_o.pos32 = !neg && (above_i != '0 || unrounded_i[31]);
      ovf_o.neg32 =  neg && (above_i != '1 || !unrounded_i[31]);
      ovf_o.pos16 = !neg && (above16 != '0 || unrounded_i[15]);
      ovf_o.neg16 =  neg && (above16 != '1 || !unrounded_i[15]);
    end else begin
      ovf_o.pos32 = above_i != '0;
      ovf_o.neg32 = 1'b0;
      ovf_o.pos16 = above16 != '0;
      ovf_o.neg16 = 1'b0;
    end
  end

endmodule
