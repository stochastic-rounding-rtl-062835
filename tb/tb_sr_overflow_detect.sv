// tb_sr_overflow_detect: checks the four range flags against comparisons of the
// 64-bit unrounded value with the 32- and 16-bit limits, signed and unsigned.
module tb_sr_overflow_detect;
  import sr_pkg::*;
  import sr_ref_pkg::*;

  logic [31:0] above, unr;
  logic        sgn;
  ovf_t        ovf, e;
  int checks = 0, failures = 0;

  sr_overflow_detect dut (.above_i(above), .unrounded_i(unr), .signed_i(sgn), .ovf_o(ovf));

  initial begin
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] d;
    wide_t u;
    for (int it = 0; it < 20000; it++) begin
      d   = rand_data();
      sgn = 1'($urandom());
      if (!sgn && $urandom_range(0, 1)) d[63:32] = '0;   // zero-extended operand
      {above, unr} = d;
      #1;
      u = sgn ? wide_t'($signed(d)) : wide_t'(d);
      e.pos32 = sgn ? (u > 64'sh7FFF_FFFF) : (u > 64'shFFFF_FFFF);
      e.neg32 = sgn && (u < -(wide_t'(1) <<< 31));
      e.pos16 = sgn ? (u > 32767) : (u > 65535);
      e.neg16 = sgn && (u < -32768);
      checks++;
      if (ovf !== e) begin
        failures++;
        if (failures < 10) $display("MISMATCH d=%h s=%0d got %b exp %b", d, sgn, ovf, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
