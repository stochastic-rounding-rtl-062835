// tb_sr_accel: end-to-end test of the accelerator through its AHB-Lite port, at
// the default parameters.
//
// A small AHB master plays sequences of pipelined transfers (address phase of
// one transfer overlapping the data phase of the previous one, HREADY looped
// back from HREADYOUT). The JKISS32 model supplies random words. Each operation
// writes the configuration register (sometimes), writes the operand (two words
// for 64-bit operands) and reads the result, either back-to-back, which must
// cost exactly one wait state, or after an idle cycle, which must cost none.
// The read word is compared with the arithmetic reference model fed with the
// random word the accelerator consumed. The test checks the write-round-read
// latency (3 data-phase cycles for 32-bit operands, 4 for 64-bit ones) and
// counts how often each mechanism happened: both round modes, every format,
// rounding up and down, saturation high and low, overflow caused by rounding
// up, bfloat16 NaN and overflow to infinity, wait states, reads without a wait,
// pipelined operations and configuration read-back. A mechanism that never
// happened counts as a failure.
module tb_sr_accel;
  import sr_pkg::*;
  import sr_ref_pkg::*;

  localparam int unsigned SRB = 32;

  logic        HCLK = 1'b0, HRESETn = 1'b0;
  logic        HSEL = 1'b0, HWRITE = 1'b0;
  logic [11:0] HADDR = '0;
  logic [1:0]  HTRANS = 2'b00;
  logic [2:0]  HSIZE = 3'b010;
  logic [31:0] HWDATA = '0, HRDATA;
  logic        HREADY, HREADYOUT, HRESP;
  logic        rng_next;
  logic [31:0] rng;

  always #5 HCLK = ~HCLK;
  assign HREADY = HREADYOUT;

  sr_accel dut (.HCLK, .HRESETn, .HSEL, .HADDR, .HTRANS, .HWRITE, .HSIZE, .HWDATA, .HREADY,
                .HRDATA, .HREADYOUT, .HRESP, .rng_next_o(rng_next), .rng_i(rng));
  jkiss32_model u_rng (.clk(HCLK), .rst_n(HRESETn), .next_i(rng_next), .rng_o(rng));

  int checks = 0, failures = 0;
  int cyc = 0;

  // mechanism counters
  int n_sr = 0, n_rn = 0, n_up = 0, n_down = 0, n_sat_hi = 0, n_sat_lo = 0, n_up_ovf = 0;
  int n_fmt[5] = '{default: 0};
  int n_nan = 0, n_inf = 0, n_wait = 0, n_nowait = 0, n_pipe = 0, n_cfg_rd = 0, n_rng = 0;
  logic [31:0] last_rng;

  always @(posedge HCLK) begin
    cyc <= cyc + 1;
    if (HRESETn && !HREADYOUT) n_wait++;
  end

  initial begin
    #50ms;
    failures++;
    $display("watchdog expired at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct {
    bit          idle;      // an idle cycle, no transfer
    bit          write;
    logic [11:0] addr;
    logic [31:0] wdata;
  } xfer_t;

  // Plays a sequence of transfers; returns per transfer the read data and the
  // cycle (counted at the middle of the cycle) in which its data phase ended.
  task automatic run_seq(input xfer_t seq[$], output logic [31:0] rdata[$], output int done[$]);
    int    i = 0, di = -1, k;
    bit    dp_act = 0;
    xfer_t dp;
    rdata = {};
    done  = {};
    foreach (seq[j]) begin rdata.push_back('0); done.push_back(-1); end
    while (i < seq.size() || dp_act) begin
      @(negedge HCLK);
      k = cyc;
      if (rng_next) begin last_rng = rng; n_rng++; end
      HWDATA = (dp_act && dp.write) ? dp.wdata : 32'h0;
      if (i < seq.size() && !seq[i].idle) begin
        HSEL = 1'b1; HTRANS = 2'b10; HWRITE = seq[i].write; HADDR = seq[i].addr;
      end else begin
        HSEL = 1'b0; HTRANS = 2'b00; HWRITE = 1'b0; HADDR = '0;
      end
      if (HREADYOUT) begin
        if (dp_act) begin
          rdata[di] = HRDATA;
          done[di]  = k;
        end
        dp_act = 0;
        if (i < seq.size()) begin
          if (seq[i].idle) begin
            done[i] = k;
          end else begin
            dp = seq[i]; di = i; dp_act = 1;
          end
          i++;
        end
      end
    end
    @(negedge HCLK);
    if (rng_next) begin last_rng = rng; n_rng++; end
    HSEL = 1'b0; HTRANS = 2'b00; HWRITE = 1'b0; HWDATA = '0;
  endtask

  function automatic logic [11:0] op_addr(int fmt, bit sgn, bit rn, bit hi);
    return 12'(OP_BASE) | 12'({3'(fmt), sgn, rn, hi} << 2);
  endfunction

  function automatic xfer_t wr(logic [11:0] a, logic [31:0] d);
    return '{idle: 0, write: 1, addr: a, wdata: d};
  endfunction
  function automatic xfer_t rd(logic [11:0] a);
    return '{idle: 0, write: 0, addr: a, wdata: '0};
  endfunction
  function automatic xfer_t idle();
    return '{idle: 1, write: 0, addr: '0, wdata: '0};
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s (cycle %0d)", what, cyc);
    end
  endtask

  logic [4:0] cfg_now = 5'd0;

  // One operation: optional config write, operand write(s), read.
  task automatic do_op(int fmt, bit sgn, bit rn, int cfg, logic [63:0] d, bit gap);
    xfer_t       seq[$];
    logic [31:0] rdata[$];
    int          done[$];
    int          wi, ri, w0, waits0, rng0;
    ref_t        r;
    logic [11:0] a;
    seq = {};
    if (cfg != int'(cfg_now) || $urandom_range(0, 15) == 0) begin
      seq.push_back(wr(12'(CFG_OFFSET), {$urandom() & 32'hFFFF_FFE0} | 32'(cfg)));
      cfg_now = 5'(cfg);
    end
    a  = op_addr(fmt, sgn, rn, 0);
    w0 = seq.size();
    if (fmt == 0) begin
      seq.push_back(wr(a, d[31:0]));
      seq.push_back(wr(op_addr(fmt, sgn, rn, 1), d[63:32]));
    end else begin
      seq.push_back(wr(a, d[31:0]));
    end
    wi = seq.size() - 1;
    if (gap) seq.push_back(idle());
    seq.push_back(rd(a));
    ri = seq.size() - 1;
    waits0 = n_wait;
    rng0   = n_rng;
    run_seq(seq, rdata, done);
    r = ref_op(fmt, sgn, rn, cfg, d, last_rng, SRB);
    check(rdata[ri] === r.word, $sformatf("result fmt=%0d s=%0d rn=%0d cfg=%0d d=%h got %h exp %h",
                                          fmt, sgn, rn, cfg, d, rdata[ri], r.word));
    // latency: first operand write's data phase to the read's, inclusive; an
    // idle cycle between write and read is the round cycle, so it adds nothing
    check(done[ri] - done[w0] + 1 == ((fmt == 0) ? 4 : 3),
          $sformatf("latency fmt=%0d gap=%0d: %0d cycles", fmt, gap, done[ri] - done[w0] + 1));
    check((n_wait - waits0) == (gap ? 0 : 1), $sformatf("wait states %0d", n_wait - waits0));
    check((n_rng - rng0) == (rn ? 0 : 1), "one random word per stochastic rounding");
    if (gap) n_nowait++;
    if (rn) n_rn++; else n_sr++;
    n_fmt[fmt]++;
    if (r.up) n_up++; else n_down++;
    if (r.sat_hi) n_sat_hi++;
    if (r.sat_lo) n_sat_lo++;
    if (r.up_ovf) n_up_ovf++;
    if (fmt == 4 && d[30:23] == 8'hFF && d[22:0] != 0) n_nan++;
    if (fmt == 4 && d[30:23] != 8'hFF && r.word[14:7] == 8'hFF) n_inf++;
  endtask

  // Two operations pipelined: write A, read A, write B, read B, no gaps.
  task automatic do_pipe();
    xfer_t       seq[$];
    logic [31:0] rdata[$];
    int          done[$];
    logic [31:0] a, b;
    a = $urandom(); b = $urandom();
    seq = {wr(op_addr(1, 1, 1, 0), a), rd(op_addr(1, 1, 1, 0)),
           wr(op_addr(1, 0, 1, 0), b), rd(op_addr(1, 0, 1, 0))};
    run_seq(seq, rdata, done);
    check(rdata[1] === ref_op(1, 1, 1, int'(cfg_now), {32'b0, a}, 0, SRB).word, "pipelined A");
    check(rdata[3] === ref_op(1, 0, 1, int'(cfg_now), {32'b0, b}, 0, SRB).word, "pipelined B");
    check(done[3] - done[0] + 1 == 6, "pipelined pair takes 6 cycles");
    n_pipe++;
  endtask

  initial begin
    xfer_t       seq[$];
    logic [31:0] rdata[$];
    int          done[$];
    logic [63:0] d;
    int          fmt, cfg;
    repeat (3) @(posedge HCLK);
    #1 HRESETn = 1'b1;
    repeat (2) @(posedge HCLK);

    // configuration register write and read-back
    seq = {wr(12'(CFG_OFFSET), 32'h0000_0013), rd(12'(CFG_OFFSET))};
    run_seq(seq, rdata, done);
    check(rdata[1] === 32'h13, "config read-back");
    cfg_now = 5'h13;
    n_cfg_rd++;
    check(HRESP == 1'b0, "OKAY response");

    // directed: rounding up the maximum saturates (signed 32, nearest, round 1 bit)
    do_op(1, 1, 1, 0, 64'h0000_0000_FFFF_FFFF, 0);   // -1 -> -0.5 -> rounds to 0
    do_op(0, 1, 1, 0, 64'h0000_0000_FFFF_FFFF, 0);   // 2^31-0.5 -> rounds up to 2^31 -> clamp
    do_op(2, 0, 0, 15, 64'h0000_0000_FFFF_FFFF, 1);  // unsigned 16 edge
    do_op(4, 0, 1, 0, 64'h0000_0000_7F7F_FFFF, 0);   // bfloat16 max finite -> infinity
    do_op(4, 0, 0, 0, 64'h0000_0000_FFC1_2345, 1);   // bfloat16 NaN
    do_pipe();

    for (int it = 0; it < 3000; it++) begin
      fmt = $urandom_range(0, 4);
      cfg = $urandom_range(0, 31);
      d   = rand_data();
      if (fmt == 4 && it % 9 == 0) d[30:23] = 8'hFF;
      if (fmt == 4 && it % 9 == 1) d[30:16] = {8'hFE, 7'h7F};
      do_op(fmt, 1'($urandom()), 1'($urandom()), cfg, d, $urandom_range(0, 3) == 0);
      if (it % 500 == 0) do_pipe();
    end

    $display("mechanisms: SR %0d, RN %0d, formats %0d/%0d/%0d/%0d/%0d, up %0d, down %0d",
             n_sr, n_rn, n_fmt[0], n_fmt[1], n_fmt[2], n_fmt[3], n_fmt[4], n_up, n_down);
    $display("            saturate hi %0d lo %0d, by round-up %0d, NaN %0d, to inf %0d",
             n_sat_hi, n_sat_lo, n_up_ovf, n_nan, n_inf);
    $display("            wait states %0d, reads without wait %0d, pipelined %0d, config reads %0d",
             n_wait, n_nowait, n_pipe, n_cfg_rd);
    check(n_sr > 0 && n_rn > 0, "both round modes used");
    foreach (n_fmt[f]) check(n_fmt[f] > 0, $sformatf("format %0d used", f));
    check(n_up > 0 && n_down > 0, "rounded up and down");
    check(n_sat_hi > 0 && n_sat_lo > 0 && n_up_ovf > 0, "saturation high, low and by round-up");
    check(n_nan > 0 && n_inf > 0, "bfloat16 NaN and overflow to infinity");
    check(n_wait > 0 && n_nowait > 0 && n_pipe > 0 && n_cfg_rd > 0, "bus mechanisms");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
