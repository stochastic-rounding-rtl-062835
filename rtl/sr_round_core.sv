// sr_round_core: the single-cycle rounding datapath of the accelerator.
//
// Fixed-point formats: sr_field_select splits the extended operand at the
// configured position into residual, unrounded result and the bits above it;
// sr_round_decision turns the residual (plus a random number for stochastic
// rounding) into a round-up bit; a 32-bit adder adds that bit to the unrounded
// result; sr_overflow_detect flags out-of-range values. The output is the
// adder's 33-bit sum plus what saturation needs, and is registered by the
// caller; saturation itself happens later (sr_saturate), as in the paper, where
// it is done on the bus read cycle.
//
// bfloat16 (this design's construction; the paper only lists the operation):
// the 31-bit magnitude of the binary32 word is rounded as an unsigned number by
// 16 bits through the same datapath, ignoring the configuration register, and
// the sign is put back. A carry out of the mantissa moves into the exponent, so
// rounding stays correct across binades and a finite value may round to
// infinity. Infinity passes unchanged; a NaN is returned as a quiet NaN with its
// sign and top payload bits. bfloat16 results are final: no overflow flags.
//
// Combinational; rand_i is consumed only in stochastic mode.
module sr_round_core
  import sr_pkg::*;
#(
  parameter int unsigned SR_BITS = 32
) (
  input  op_t         op_i,
  input  logic [4:0]  cfg_i,
  input  logic [63:0] data_i,
  input  logic [31:0] rand_i,
  output rounded_t    res_o
);

  logic        is_bf16;
  logic [63:0] dp_data;
  in_width_e   dp_width;
  logic        dp_signed;
  logic [4:0]  dp_cfg;

  logic [31:0] residual, unrounded, above;
  logic        round_up;
  logic [32:0] sum;
  ovf_t        ovf;

  logic        bf_nan;
  logic [15:0] bf_res;

  always_comb begin
    is_bf16   = op_i.fmt == FMT_BF16;
    dp_data   = is_bf16 ? {33'b0, data_i[30:0]} : data_i;
    dp_width  = is_bf16 ? W32 : fmt_width(op_i.fmt);
    dp_signed = is_bf16 ? 1'b0 : op_i.sgn;
    dp_cfg    = is_bf16 ? 5'd15 : cfg_i;
  end

  sr_field_select u_select (
    .data_i     (dp_data),
    .width_i    (dp_width),
    .signed_i   (dp_signed),
    .cfg_i      (dp_cfg),
    .residual_o (residual),
    .unrounded_o(unrounded),
    .above_o    (above)
  );

  sr_round_decision #(.SR_BITS(SR_BITS)) u_decide (
    .residual_i  (residual),
    .rand_i      (rand_i[SR_BITS-1:0]),
    .round_mode_i(op_i.rn),
    .round_up_o  (round_up)
  );

  sr_overflow_detect u_ovf (
    .above_i    (above),
    .unrounded_i(unrounded),
    .signed_i   (dp_signed),
    .ovf_o      (ovf)
  );

  always_comb begin
    sum    = {1'b0, unrounded} + 33'(round_up);
    bf_nan = (data_i[30:23] == 8'hFF) && (data_i[22:0] != '0);
    bf_res = bf_nan ? {data_i[31], 8'hFF, 1'b1, data_i[21:16]}
                    : {data_i[31], sum[14:0]};
    if (is_bf16) begin
      res_o.sum    = {17'b0, bf_res};
      res_o.umsb32 = 1'b0;
      res_o.umsb16 = 1'b0;
      res_o.ovf    = '0;
    end else begin
      res_o.sum    = sum;
      res_o.umsb32 = unrounded[31];
      res_o.umsb16 = unrounded[15];
      res_o.ovf    = ovf;
    end
  end

endmodule
