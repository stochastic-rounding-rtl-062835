// sr_saturate: clamps the rounded result to the output format on the read cycle.
//
// Takes the registered round-cycle result (sum of the rounding adder with its
// carry, the unrounded result's sign bits, the overflow flags) and the format and
// signedness of the bus read address, and returns the 32-bit read word:
//   out of range before rounding        -> maximum or minimum of the format
//   rounding up the maximum              -> maximum (signed: sum's top bit set
//                                           while the unrounded top bit was
//                                           clear; unsigned: carry out)
//   otherwise                            -> the rounded sum
// The limits are those of Algorithms 1-3 of the paper (MAX_INT32/MIN_INT32) and
// their 16-bit and unsigned counterparts. 16-bit results are sign- or
// zero-extended to 32 bits and bfloat16 results are zero-extended; those
// extensions are this design's choice. Purely combinational.
module sr_saturate
  import sr_pkg::*;
(
  input  fmt_e        fmt_i,
  input  logic        signed_i,
  input  rounded_t    res_i,
  output logic [31:0] data_o
);

  logic [15:0] r16;

  always_comb begin
    r16    = res_i.sum[15:0];
    data_o = '0;
    case (fmt_i)
      FMT_64_32, FMT_32_32: begin
        if (signed_i) begin
          if (res_i.ovf.pos32 || (!res_i.ovf.neg32 && !res_i.umsb32 && res_i.sum[31]))
            data_o = 32'h7FFF_FFFF;
          else if (res_i.ovf.neg32)
            data_o = 32'h8000_0000;
          else
            data_o = res_i.sum[31:0];
        end else begin
          if (res_i.ovf.pos32 || res_i.sum[32])
            data_o = 32'hFFFF_FFFF;
          else
            data_o = res_i.sum[31:0];
        end
      end
      FMT_32_16, FMT_16_16: begin
        if (signed_i) begin
          if (res_i.ovf.pos16 || (!res_i.ovf.neg16 && !res_i.umsb16 && r16[15]))
            data_o = 32'h0000_7FFF;
          else if (res_i.ovf.neg16)
            data_o = 32'hFFFF_8000;
          else
            data_o = {{16{r16[15]}}, r16};
        end else begin
          if (res_i.ovf.pos16 || res_i.sum[16])
            data_o = 32'h0000_FFFF;
          else
            data_o = {16'b0, r16};
        end
      end
      FMT_BF16: data_o = {16'b0, r16};
      default:  data_o = '0;
    endcase
  end

endmodule
