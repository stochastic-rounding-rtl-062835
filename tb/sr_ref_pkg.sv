// sr_ref_pkg: arithmetic reference model of the accelerator's operations.
//
// Written with wide signed integers and shifts, not bit slicing, so that it is
// independent of the RTL. Fixed-point rounding of n = cfg+1 bits is
//   nearest:     x = (x + 2^(n-1)) >> n                      (ties up)
//   stochastic:  k = min(n, sr_bits); x = x >> (n-k);
//                p = (rand mod 2^sr_bits) >> (sr_bits-k); x = (x + p) >> k
// (">>" an arithmetic shift, i.e. floor), which is the stochastic rounding by
// addition of the paper's Algorithm 2 using the top k bits of the random
// number's low sr_bits bits. The result is then clamped to the output range.
// binary32 -> bfloat16 rounds the 31-bit magnitude by 16 bits the same way and
// returns NaN inputs as quiet NaNs.
package sr_ref_pkg;

  typedef logic signed [127:0] wide_t;

  typedef struct {
    logic [31:0] word;       // expected read word
    bit          sat_hi;     // clamped to the maximum
    bit          sat_lo;     // clamped to the minimum
    bit          up;         // rounded value above the truncated one
    bit          up_ovf;     // in range before rounding, above it after
  } ref_t;

  function automatic wide_t round_wide(wide_t x, int n, bit rn, logic [31:0] rnd, int sr_bits);
    wide_t p;
    int    k;
    if (rn) return (x + (wide_t'(1) <<< (n - 1))) >>> n;
    k = (n < sr_bits) ? n : sr_bits;
    x = x >>> (n - k);
    p = wide_t'(rnd & 32'((64'd1 << sr_bits) - 1)) >>> (sr_bits - k);
    return (x + p) >>> k;
  endfunction

  function automatic ref_t ref_op(int fmt, bit sgn, bit rn, int cfg, logic [63:0] d,
                                  logic [31:0] rnd, int sr_bits);
    ref_t  r;
    wide_t x, t, q, lo, hi;
    int    n;
    r = '{word: '0, sat_hi: 0, sat_lo: 0, up: 0, up_ovf: 0};
    if (fmt == 4) begin
      if (d[30:23] == 8'hFF && d[22:0] != 0) begin
        r.word = {16'b0, d[31], 8'hFF, 1'b1, d[21:16]};
        return r;
      end
      x = wide_t'(d[30:0]);
      q = round_wide(x, 16, rn, rnd, sr_bits);
      r.up   = q != (x >>> 16);
      r.word = {16'b0, d[31], q[14:0]};
      return r;
    end
    n = cfg + 1;
    case (fmt)
      0:       x = sgn ? wide_t'($signed(d))       : wide_t'(d);
      3:       x = sgn ? wide_t'($signed(d[15:0])) : wide_t'(d[15:0]);
      default: x = sgn ? wide_t'($signed(d[31:0])) : wide_t'(d[31:0]);
    endcase
    t = x >>> n;
    q = round_wide(x, n, rn, rnd, sr_bits);
    r.up = q != t;
    if (fmt == 2 || fmt == 3) begin
      lo = sgn ? -wide_t'(32768) : 0;
      hi = sgn ?  wide_t'(32767) : wide_t'(65535);
    end else begin
      lo = sgn ? -(wide_t'(1) <<< 31) : 0;
      hi = sgn ?  (wide_t'(1) <<< 31) - 1 : (wide_t'(1) <<< 32) - 1;
    end
    r.up_ovf = (t <= hi) && (q > hi);
    if (q > hi) begin q = hi; r.sat_hi = 1; end
    if (q < lo) begin q = lo; r.sat_lo = 1; end
    r.word = q[31:0];
    return r;
  endfunction

  // Random operand biased towards range edges: often the bits above a random
  // position are a copy of that position's bit, and the bits below it are
  // sometimes all ones or all zeros.
  function automatic logic [63:0] rand_data();
    logic [63:0] d;
    int          b, m;
    d = {$urandom(), $urandom()};
    m = $urandom_range(0, 3);
    b = $urandom_range(0, 63);
    if (m != 0)
      for (int i = b + 1; i < 64; i++) d[i] = d[b];
    if (m == 2) for (int i = 0; i < b; i++) d[i] = 1'b1;
    if (m == 3) for (int i = 0; i < b; i++) d[i] = ($urandom_range(0, 7) == 0);
    return d;
  endfunction

endpackage
