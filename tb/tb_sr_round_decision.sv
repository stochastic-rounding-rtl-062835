// tb_sr_round_decision: checks the round-up bit for the 32-bit random adder and
// for 16- and 8-bit ones. Stochastic: round up exactly when the top k residual bits
// plus the random number reach 2^k. Nearest: round up when the residual is at
// least one half. Also checks that a 32-bit residual of r/2^32 rounds up with
// probability close to r/2^32 over random numbers.
module tb_sr_round_decision;
  logic [31:0] residual, rnd;
  logic        rm;
  logic        up32, up16, up8;
  int checks = 0, failures = 0;

  sr_round_decision                dut32 (.residual_i(residual), .rand_i(rnd),      .round_mode_i(rm), .round_up_o(up32));
  sr_round_decision #(.SR_BITS(16)) dut16 (.residual_i(residual), .rand_i(rnd[15:0]), .round_mode_i(rm), .round_up_o(up16));
  sr_round_decision #(.SR_BITS(8)) dut8  (.residual_i(residual), .rand_i(rnd[7:0]), .round_mode_i(rm), .round_up_o(up8));

  task automatic check(bit got, bit exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("MISMATCH %s res=%h rnd=%h rm=%0d got %0d exp %0d", what, residual, rnd, rm, got, exp);
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
    int ups;
    for (int it = 0; it < 20000; it++) begin
      residual = $urandom();
      rnd      = $urandom();
      if (it % 7 == 0) rnd = 32'(0) - residual - 32'($urandom_range(0, 1));   // carry edge
      rm       = 1'($urandom());
      #1;
      check(up32, rm ? residual >= 32'h8000_0000 : (64'(residual) + 64'(rnd) >= 64'h1_0000_0000), "sr32");
      check(up16, rm ? residual >= 32'h8000_0000 : (int'(residual[31:16]) + int'(rnd[15:0]) >= 65536), "sr16");
      check(up8,  rm ? residual >= 32'h8000_0000 : (int'(residual[31:24]) + int'(rnd[7:0]) >= 256), "sr8");
    end
    // statistics: residual 0.3 of a unit
    rm = 1'b0;
    residual = 32'd1288490189;   // round(0.3 * 2^32)
    ups = 0;
    for (int it = 0; it < 10000; it++) begin
      rnd = $urandom();
      #1;
      ups += int'(up32);
    end
    checks++;
    if (ups < 2850 || ups > 3150) begin
      failures++;
      $display("round-up rate %0d/10000, expected about 3000", ups);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
