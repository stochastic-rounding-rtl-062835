// sr_pkg: types and constants shared by the rounding and saturation accelerator.
//
// The accelerator rounds a fixed-point operand (64, 32 or 16 bits wide) at a
// configurable bit position, either to nearest (ties up) or stochastically, and
// saturates the result to a 32- or 16-bit format; it also rounds binary32 to
// bfloat16. Which operation runs is chosen by the bus address that is written.
// The format list follows the paper's specification; the encodings, the
// address map and the overflow-flag layout below are this design's own.
package sr_pkg;

  // Operation formats: input width -> output width.
  typedef enum logic [2:0] {
    FMT_64_32 = 3'd0,   // 64-bit operand (two bus writes) -> 32-bit result
    FMT_32_32 = 3'd1,   // 32-bit operand -> 32-bit result
    FMT_32_16 = 3'd2,   // 32-bit operand -> 16-bit result
    FMT_16_16 = 3'd3,   // 16-bit operand -> 16-bit result
    FMT_BF16  = 3'd4    // binary32 -> bfloat16
  } fmt_e;

  typedef enum logic [1:0] {
    W64 = 2'd0,
    W32 = 2'd1,
    W16 = 2'd2
  } in_width_e;

  // Round mode encoding as printed on the round-mode multiplexer:
  // input 1 takes the residual's top bit (nearest), input 0 the carry (stochastic).
  localparam logic RM_SR = 1'b0;
  localparam logic RM_RN = 1'b1;

  typedef struct packed {
    fmt_e fmt;
    logic sgn;          // signed arithmetic
    logic rn;           // round mode, RM_RN or RM_SR
  } op_t;

  // Overflow flags of the unrounded value against the output ranges.
  typedef struct packed {
    logic pos32;        // above the 32-bit maximum
    logic neg32;        // below the 32-bit minimum
    logic pos16;        // above the 16-bit maximum
    logic neg16;        // below the 16-bit minimum
  } ovf_t;

  // Registered result of the round cycle, saturated on the bus read cycle.
  typedef struct packed {
    logic [32:0] sum;     // unrounded result + round-up bit, with carry out
    logic        umsb32;  // bit 31 of the unrounded result
    logic        umsb16;  // bit 15 of the unrounded result
    ovf_t        ovf;
  } rounded_t;

  // Address map (byte offsets inside the accelerator's window).
  localparam int unsigned CFG_OFFSET = 'h000;
  // Operation addresses: bit 8 set, HADDR[7:2] = {fmt, signed, round mode, high word}.
  localparam int unsigned OP_BASE    = 'h100;

  function automatic in_width_e fmt_width(fmt_e f);
    case (f)
      FMT_64_32: return W64;
      FMT_16_16: return W16;
      default:   return W32;
    endcase
  endfunction

  function automatic logic fmt_out16(fmt_e f);
    return (f == FMT_32_16) || (f == FMT_16_16) || (f == FMT_BF16);
  endfunction

  function automatic logic fmt_valid(logic [2:0] f);
    return f <= 3'd4;
  endfunction

endpackage
