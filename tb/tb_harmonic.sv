// tb_harmonic: the harmonic-series stagnation experiment run on the accelerator.
//
// The series 1 + 1/2 + 1/3 + ... is summed by recursive summation in a
// fixed-point sum initialised to 1. Each addend is computed as an unsigned
// fraction, floor(2^32/i) (u0.32) or floor(2^16/i) (u0.16), and rounded by the
// accelerator to the sum's format before the add:
//   s16.15 sum: 32->32 unsigned, round 17 bits (configuration 16)
//   s8.7 sum:   16->16 unsigned, round 9 bits  (configuration 8)
// With round to nearest the sum stagnates once the addends fall below half a
// unit of the sum's last place; with stochastic rounding it keeps tracking the
// binary64 sum. Checked here:
//   - every rounded addend equals the reference model's for the random word used;
//   - round to nearest: the sum stops changing after i = 65536 (s16.15) and
//     i = 256 (s8.7), the published iteration counts 65537 and 257, with final
//     sums within a few units of the published 11.938 and 6.414;
//   - stochastic rounding, s8.7: addends run out of bits after i = 65536; the
//     final sum must lie within 4 standard deviations of the published mean
//     11.205 (std. dev. 0.242);
//   - stochastic rounding, s16.15, N_SR = 5 million iterations: the sum must be
//     within 0.06 (5 published standard deviations of 0.012) of the binary64
//     sum ln N + gamma + 1/(2N), which is the published 16.002 at 5 million.
module tb_harmonic;
  import sr_pkg::*;
  import sr_ref_pkg::*;

  localparam int N_SR = 5_000_000;   // s16.15 stochastic run length, as published

  logic        HCLK = 1'b0, HRESETn = 1'b0;
  logic        HSEL = 1'b0, HWRITE = 1'b0;
  logic [11:0] HADDR = '0;
  logic [1:0]  HTRANS = 2'b00;
  logic [2:0]  HSIZE = 3'b010;
  logic [31:0] HWDATA = '0, HRDATA;
  logic        HREADY, HREADYOUT, HRESP;
  logic        rng_next;
  logic [31:0] rng, last_rng;
  longint      cyc = 0;
  int          checks = 0, failures = 0;

  always #5 HCLK = ~HCLK;
  always @(posedge HCLK) cyc <= cyc + 1;
  assign HREADY = HREADYOUT;

  sr_accel dut (.HCLK, .HRESETn, .HSEL, .HADDR, .HTRANS, .HWRITE, .HSIZE, .HWDATA, .HREADY,
                .HRDATA, .HREADYOUT, .HRESP, .rng_next_o(rng_next), .rng_i(rng));
  jkiss32_model u_rng (.clk(HCLK), .rst_n(HRESETn), .next_i(rng_next), .rng_o(rng));

  initial begin
    #1s;
    failures++;
    $display("watchdog expired at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // single write, then a read of the same address
  task automatic bus_op(logic [11:0] a, logic [31:0] d, output logic [31:0] q);
    @(negedge HCLK);
    HSEL = 1'b1; HTRANS = 2'b10; HWRITE = 1'b1; HADDR = a;
    @(negedge HCLK);
    HWDATA = d; HWRITE = 1'b0;
    @(negedge HCLK);
    HSEL = 1'b0; HTRANS = 2'b00;
    while (!HREADYOUT) begin
      if (rng_next) last_rng = rng;
      @(negedge HCLK);
    end
    if (rng_next) last_rng = rng;
    q = HRDATA;
  endtask

  task automatic bus_write(logic [11:0] a, logic [31:0] d);
    @(negedge HCLK);
    HSEL = 1'b1; HTRANS = 2'b10; HWRITE = 1'b1; HADDR = a;
    @(negedge HCLK);
    HWDATA = d; HSEL = 1'b0; HTRANS = 2'b00;
  endtask

  function automatic logic [11:0] op_addr(int fmt, bit rn);
    return 12'(OP_BASE) | 12'({3'(fmt), 1'b0, rn, 1'b0} << 2);
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // Sums the series from i = 2 to n; returns the sum in units of 2^-frac and the
  // last i at which the sum changed. Every rounded addend is checked.
  task automatic run(int fmt, bit rn, int frac, int n, output longint sum, output int last_change);
    logic [31:0] addend, q;
    int          cfg, bad;
    ref_t        r;
    cfg = (fmt == 1) ? 32 - frac - 1 : 16 - frac - 1;
    bus_write(12'(CFG_OFFSET), 32'(cfg));
    sum = longint'(1) << frac;
    last_change = 1;
    bad = 0;
    for (int i = 2; i <= n; i++) begin
      addend = (fmt == 1) ? 32'((64'd1 << 32) / 64'(i)) : 32'((64'd1 << 16) / 64'(i));
      bus_op(op_addr(fmt, rn), addend, q);
      r = ref_op(fmt, 1'b0, rn, cfg, {32'b0, addend}, last_rng, 32);
      if (q !== r.word) begin
        bad++;
        if (bad < 5) $display("addend i=%0d: got %h exp %h", i, q, r.word);
      end
      if (q != 0) last_change = i;
      sum += longint'(q);
    end
    check(bad == 0, $sformatf("rounded addends fmt=%0d rn=%0d (%0d wrong)", fmt, rn, bad));
  endtask

  initial begin
    longint s;
    int     lc;
    real    v, h;
    repeat (3) @(posedge HCLK);
    #1 HRESETn = 1'b1;

    run(1, 1'b1, 15, 70000, s, lc);
    v = real'(s) / 32768.0;
    $display("s16.15 RN: sum %f, last change at i=%0d", v, lc);
    check(lc == 65536, "s16.15 RN stagnates after i = 65536");
    check(v > 11.938 - 0.002 && v < 11.938 + 0.002, "s16.15 RN final sum near 11.938");

    run(3, 1'b1, 7, 1000, s, lc);
    v = real'(s) / 128.0;
    $display("s8.7 RN: sum %f, last change at i=%0d", v, lc);
    check(lc == 256, "s8.7 RN stagnates after i = 256");
    check(v > 6.414 - 0.01 && v < 6.414 + 0.01, "s8.7 RN final sum near 6.414");

    run(3, 1'b0, 7, 70000, s, lc);
    v = real'(s) / 128.0;
    $display("s8.7 SR: sum %f, last change at i=%0d", v, lc);
    check(lc <= 65536, "s8.7 SR addends run out of bits after i = 65536");
    check(v > 11.205 - 4 * 0.242 && v < 11.205 + 4 * 0.242, "s8.7 SR final sum near 11.205");

    run(1, 1'b0, 15, N_SR, s, lc);
    v = real'(s) / 32768.0;
    h = $ln(real'(N_SR)) + 0.5772156649 + 1.0 / (2.0 * real'(N_SR));
    $display("s16.15 SR: %0d iterations, sum %f, binary64 %f, last change at i=%0d", N_SR, v, h, lc);
    check(v > h - 0.06 && v < h + 0.06, "s16.15 SR tracks the binary64 sum");
    check(lc > 65537, "s16.15 SR does not stagnate at 65537");
    $display("cycles %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
