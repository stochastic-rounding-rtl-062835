// tb_sr_round_core: drives the rounding datapath with random operations (every
// format, signedness, round mode and position) and checks (1) the adder sum
// against the truncated value plus the reference round-up decision and (2) the
// whole operation, datapath followed by saturation, against the arithmetic
// reference model. Run for the 32-, 16- and 8-bit stochastic adders.
module tb_sr_round_core;
  import sr_pkg::*;
  import sr_ref_pkg::*;

  op_t         op;
  logic [4:0]  cfg;
  logic [63:0] data;
  logic [31:0] rnd;
  rounded_t    res32, res16, res8;
  logic [31:0] word32, word16, word8;
  int checks = 0, failures = 0;
  int n_bf_nan = 0, n_bf_inf = 0;

  sr_round_core                dut32 (.op_i(op), .cfg_i(cfg), .data_i(data), .rand_i(rnd), .res_o(res32));
  sr_round_core #(.SR_BITS(16)) dut16 (.op_i(op), .cfg_i(cfg), .data_i(data), .rand_i(rnd), .res_o(res16));
  sr_round_core #(.SR_BITS(8)) dut8  (.op_i(op), .cfg_i(cfg), .data_i(data), .rand_i(rnd), .res_o(res8));
  sr_saturate sat32 (.fmt_i(op.fmt), .signed_i(op.sgn), .res_i(res32), .data_o(word32));
  sr_saturate sat16 (.fmt_i(op.fmt), .signed_i(op.sgn), .res_i(res16), .data_o(word16));
  sr_saturate sat8  (.fmt_i(op.fmt), .signed_i(op.sgn), .res_i(res8),  .data_o(word8));

  task automatic check(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10)
        $display("MISMATCH %s fmt=%0d s=%0d rn=%0d cfg=%0d d=%h rnd=%h got %h exp %h",
                 what, op.fmt, op.sgn, op.rn, cfg, data, rnd, got, exp);
    end
  endtask

  initial begin
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_t  r;
    wide_t v, t;
    int    n;
    logic [32:0] esum;
    for (int it = 0; it < 30000; it++) begin
      op.fmt = fmt_e'($urandom_range(0, 4));
      op.sgn = 1'($urandom());
      op.rn  = 1'($urandom());
      cfg    = 5'($urandom());
      data   = rand_data();
      rnd    = $urandom();
      if (op.fmt == FMT_BF16 && it % 10 == 0)
        data[30:0] = {8'hFF, (it % 20 == 0) ? 23'h0 : 23'($urandom())};   // inf / NaN
      if (op.fmt == FMT_BF16 && it % 10 == 5)
        data[30:0] = {8'hFE, 7'h7F, 16'($urandom())};                      // largest binade
      #1;
      r = ref_op(int'(op.fmt), op.sgn, op.rn, int'(cfg), data, rnd, 32);
      check(word32, r.word, "word32");
      r = ref_op(int'(op.fmt), op.sgn, op.rn, int'(cfg), data, rnd, 16);
      check(word16, r.word, "word16");
      r = ref_op(int'(op.fmt), op.sgn, op.rn, int'(cfg), data, rnd, 8);
      check(word8, r.word, "word8");
      if (op.fmt != FMT_BF16) begin
        case (op.fmt)
          FMT_64_32: v = op.sgn ? wide_t'($signed(data))       : wide_t'(data);
          FMT_16_16: v = op.sgn ? wide_t'($signed(data[15:0])) : wide_t'(data[15:0]);
          default:   v = op.sgn ? wide_t'($signed(data[31:0])) : wide_t'(data[31:0]);
        endcase
        n = int'(cfg) + 1;
        t = v >>> n;
        esum = {1'b0, t[31:0]} + 33'(round_wide(v, n, op.rn, rnd, 32) != t);
        check(res32.sum[31:0], esum[31:0], "sum");
        checks++;
        if (res32.sum[32] !== esum[32]) failures++;
      end else begin
        if (data[30:23] == 8'hFF) n_bf_nan++;
        if (data[30:23] == 8'hFE && word32[14:7] == 8'hFF) n_bf_inf++;
      end
    end
    $display("bfloat16: inf/NaN inputs %0d, rounded to infinity %0d", n_bf_nan, n_bf_inf);
    checks++;
    if (n_bf_nan == 0 || n_bf_inf == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
