// sr_field_select: operand extension and bit-field selection of the rounder.
//
// The operand is extended into a 127-bit vector laid out as
//   {sign extension, 64-bit data input, 31 zero bits}
// where the extension (and the unused top of the data field for 32- and 16-bit
// operands) is filled with the sign bit for signed arithmetic and with zeros
// otherwise. With cfg_i = c, c+1 bits are rounded off; data bit 0 sits at vector
// bit 31, so three 32-bit "base minus" slices give
//   residual_o  = vec[c+31 : c]      top 32 bits of the residual, left aligned
//   unrounded_o = vec[c+63 : c+32]   the truncated result
//   above_o     = vec[c+95 : c+64]   the bits above the result (overflow check)
// The vector layout, its width and the three pick blocks follow the paper's
// architecture diagram; the 16-bit operand extension is this design's choice.
// Purely combinational.
module sr_field_select
  import sr_pkg::*;
(
  input  logic [63:0] data_i,
  input  in_width_e   width_i,
  input  logic        signed_i,
  input  logic [4:0]  cfg_i,
  output logic [31:0] residual_o,
  output logic [31:0] unrounded_o,
  output logic [31:0] above_o
);

  logic         sign;
  logic [95:0]  ext;
  logic [126:0] vec;

  always_comb begin
    case (width_i)
      W64:     sign = signed_i & data_i[63];
      W32:     sign = signed_i & data_i[31];
      default: sign = signed_i & data_i[15];
    endcase
    case (width_i)
      W64:     ext = {{32{sign}}, data_i};
      W32:     ext = {{64{sign}}, data_i[31:0]};
      default: ext = {{80{sign}}, data_i[15:0]};
    endcase
    vec = {ext, 31'b0};
    residual_o  = vec[32'(cfg_i) +: 32];
    unrounded_o = vec[32'(cfg_i) + 32 +: 32];
    above_o     = vec[32'(cfg_i) + 64 +: 32];
  end

endmodule
