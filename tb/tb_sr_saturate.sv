// tb_sr_saturate: feeds the saturation stage with the round-cycle result of a
// random 64-bit unrounded value U and round-up bit r (sum, sign bits and range
// flags worked out arithmetically here) and checks that the read word is U + r
// clamped to the range of each output format, signed and unsigned. Also
// checks the bfloat16 pass-through.
module tb_sr_saturate;
  import sr_pkg::*;
  import sr_ref_pkg::*;

  fmt_e        fmt;
  logic        sgn;
  rounded_t    res;
  logic [31:0] data;
  int checks = 0, failures = 0;
  int n_hi = 0, n_lo = 0, n_upovf = 0;

  sr_saturate dut (.fmt_i(fmt), .signed_i(sgn), .res_i(res), .data_o(data));

  initial begin
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] d;
    logic        r;
    wide_t u, q, lo, hi;
    logic [31:0] e;
    for (int it = 0; it < 30000; it++) begin
      d   = rand_data();
      sgn = 1'($urandom());
      r   = 1'($urandom());
      fmt = fmt_e'($urandom_range(0, 3));
      if (!sgn && $urandom_range(0, 1)) d[63:32] = '0;
      if (it % 5 == 0) d = sgn ? (fmt_out16(fmt) ? 64'h7FFF : 64'h7FFF_FFFF)
                               : (fmt_out16(fmt) ? 64'hFFFF : 64'hFFFF_FFFF);
      u = sgn ? wide_t'($signed(d)) : wide_t'(d);
      res.sum        = {1'b0, d[31:0]} + 33'(r);
      res.umsb32     = d[31];
      res.umsb16     = d[15];
      res.ovf.pos32  = sgn ? (u > 64'sh7FFF_FFFF) : (u > 64'shFFFF_FFFF);
      res.ovf.neg32  = sgn && (u < -(wide_t'(1) <<< 31));
      res.ovf.pos16  = sgn ? (u > 32767) : (u > 65535);
      res.ovf.neg16  = sgn && (u < -32768);
      #1;
      if (fmt_out16(fmt)) begin lo = sgn ? -32768 : 0; hi = sgn ? 32767 : 65535; end
      else begin
        lo = sgn ? -(wide_t'(1) <<< 31) : 0;
        hi = sgn ? (wide_t'(1) <<< 31) - 1 : (wide_t'(1) <<< 32) - 1;
      end
      q = u + wide_t'(r);
      if (q > hi) begin n_hi++; if (u == hi) n_upovf++; q = hi; end
      if (q < lo) begin n_lo++; q = lo; end
      e = q[31:0];
      checks++;
      if (data !== e) begin
        failures++;
        if (failures < 10) $display("MISMATCH fmt=%0d s=%0d U=%h r=%0d got %h exp %h", fmt, sgn, d, r, data, e);
      end
    end
    // bfloat16 results pass through unchanged
    for (int it = 0; it < 100; it++) begin
      fmt = FMT_BF16;
      res = '0;
      res.sum[15:0] = 16'($urandom());
      #1;
      checks++;
      if (data !== {16'b0, res.sum[15:0]}) failures++;
    end
    $display("saturated high %0d (by the round-up %0d), low %0d", n_hi, n_upovf, n_lo);
    checks++;
    if (n_hi == 0 || n_lo == 0 || n_upovf == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
