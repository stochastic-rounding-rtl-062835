// tb_sr_field_select: checks the residual, unrounded-result and above-result
// fields against shifts and masks of the sign- or zero-extended operand value,
// for random operands, widths, signedness and every rounding position.
module tb_sr_field_select;
  import sr_pkg::*;
  import sr_ref_pkg::*;

  logic [63:0] data;
  in_width_e   width;
  logic        sgn;
  logic [4:0]  cfg;
  logic [31:0] residual, unrounded, above;
  int checks = 0, failures = 0;

  sr_field_select dut (.data_i(data), .width_i(width), .signed_i(sgn), .cfg_i(cfg),
                       .residual_o(residual), .unrounded_o(unrounded), .above_o(above));

  initial begin
    #10ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wide_t v, e_res, e_unr, e_abv;
    int n;
    for (int it = 0; it < 20000; it++) begin
      data  = rand_data();
      width = in_width_e'($urandom_range(0, 2));
      sgn   = 1'($urandom());
      cfg   = (it < 32) ? 5'(it) : 5'($urandom());
      #1;
      case (width)
        W64:     v = sgn ? wide_t'($signed(data))        : wide_t'(data);
        W32:     v = sgn ? wide_t'($signed(data[31:0]))  : wide_t'(data[31:0]);
        default: v = sgn ? wide_t'($signed(data[15:0]))  : wide_t'(data[15:0]);
      endcase
      n     = int'(cfg) + 1;
      e_res = (v & ((wide_t'(1) <<< n) - 1)) <<< (32 - n);
      e_unr = v >>> n;
      e_abv = v >>> (n + 32);
      checks++;
      if (residual != e_res[31:0] || unrounded != e_unr[31:0] || above != e_abv[31:0]) begin
        failures++;
        if (failures < 10)
          $display("MISMATCH d=%h w=%0d s=%0d cfg=%0d: got %h %h %h exp %h %h %h",
                   data, width, sgn, cfg, residual, unrounded, above,
                   e_res[31:0], e_unr[31:0], e_abv[31:0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
