// sr_accel: memory-mapped rounding and saturation accelerator (AHB-Lite slave).
//
// The processor writes an operand to an operation address and reads the rounded,
// saturated result back. The address says what to do: HADDR[7:2] of an
// operation address is {format[2:0], signed, round mode, high word}, so every
// combination of format (64->32, 32->32, 32->16, 16->16, binary32->bfloat16),
// signedness and round mode (stochastic or nearest) has its own address. The
// configuration register at offset 0x000 holds the rounding position: value c
// rounds off c+1 bits (0..31 -> 1..32 bits).
//
// Timing (data phases of the bus):
//   32-bit operand:  write | round | read          (3 cycles)
//   64-bit operand:  write low | write high | round | read   (4 cycles)
// The write data phase loads the operand register. In the round cycle the
// datapath (sr_round_core) works from that register and the current PRNG word,
// rng_next_o asks the generator to advance, and the result register is loaded.
// On the read data phase sr_saturate clamps the registered result according to
// the format and signedness of the read address. A read whose data phase falls
// in the round cycle is held for one wait state (HREADYOUT low). Rounds are
// pipelined: a new operand may be written while the previous one is rounded.
//
// The 3/4-cycle latency, one-cycle rounding, saturation on the read cycle,
// address-selected operations and the 5-bit configuration register follow the
// paper. The address map, the low-then-high order of 64-bit writes, the wait
// state, the PRNG handshake and reset values are this design's choices.
// HSIZE is not decoded: word accesses are expected (checked by an assertion).
// Only HTRANS[1] is decoded, so SEQ and NONSEQ transfers are treated alike.
module sr_accel
  import sr_pkg::*;
#(
  parameter int unsigned SR_BITS = 32,
  parameter int unsigned ADDR_W  = 12
) (
  input  logic              HCLK,
  input  logic              HRESETn,
  input  logic              HSEL,
  input  logic [ADDR_W-1:0] HADDR,
  input  logic [1:0]        HTRANS,
  input  logic              HWRITE,
  input  logic [2:0]        HSIZE,
  input  logic [31:0]       HWDATA,
  input  logic              HREADY,
  output logic [31:0]       HRDATA,
  output logic              HREADYOUT,
  output logic              HRESP,
  // PRNG port
  output logic              rng_next_o,
  input  logic [31:0]       rng_i
);

  // ---- address phase capture ----
  logic              dp_valid, dp_write;
  logic [ADDR_W-1:0] dp_addr;

  always_ff @(posedge HCLK or negedge HRESETn) begin
    if (!HRESETn) begin
      dp_valid <= 1'b0;
      dp_write <= 1'b0;
      dp_addr  <= '0;
    end else if (HREADY) begin
      dp_valid <= HSEL && HTRANS[1];
      dp_write <= HWRITE;
      dp_addr  <= HADDR;
    end
  end

  // ---- decode of the data-phase address ----
  logic dp_is_cfg, dp_is_op, dp_hi;
  op_t  dp_op;

  always_comb begin
    dp_is_cfg  = (dp_addr >> 2) == ADDR_W'(CFG_OFFSET >> 2);
    dp_is_op   = ((dp_addr >> 8) == ADDR_W'(OP_BASE >> 8)) && fmt_valid(dp_addr[7:5]);
    dp_op.fmt  = fmt_e'(dp_addr[7:5]);
    dp_op.sgn  = dp_addr[4];
    dp_op.rn   = dp_addr[3];
    dp_hi      = dp_addr[2];
  end

  // ---- registers ----
  logic [4:0]  cfg_q;
  logic [63:0] opnd_q;
  op_t         op_q;
  logic        pend_q;      // operand loaded, round cycle is next
  rounded_t    res_q;
  rounded_t    core_res;
  logic        wr_op, start;

  always_comb begin
    wr_op = dp_valid && dp_write && dp_is_op;
    start = wr_op && (dp_op.fmt != FMT_64_32 || dp_hi);
  end

  always_ff @(posedge HCLK or negedge HRESETn) begin
    if (!HRESETn) begin
      cfg_q  <= '0;
      opnd_q <= '0;
      op_q   <= '0;
      pend_q <= 1'b0;
      res_q  <= '0;
    end else begin
      if (dp_valid && dp_write && dp_is_cfg)
        cfg_q <= HWDATA[4:0];
      if (wr_op) begin
        op_q <= dp_op;
        if (dp_op.fmt != FMT_64_32)
          opnd_q <= {32'b0, HWDATA};
        else if (dp_hi)
          opnd_q[63:32] <= HWDATA;
        else
          opnd_q[31:0] <= HWDATA;
      end
      if (pend_q)
        res_q <= core_res;
      pend_q <= start;
    end
  end

  sr_round_core #(.SR_BITS(SR_BITS)) u_core (
    .op_i  (op_q),
    .cfg_i (cfg_q),
    .data_i(opnd_q),
    .rand_i(rng_i),
    .res_o (core_res)
  );

  assign rng_next_o = pend_q && (op_q.rn == RM_SR);

  // ---- read path: saturation on the output cycle ----
  logic [31:0] sat_data;

  sr_saturate u_sat (
    .fmt_i   (dp_op.fmt),
    .signed_i(dp_op.sgn),
    .res_i   (res_q),
    .data_o  (sat_data)
  );

  always_comb begin
    HREADYOUT = !(dp_valid && !dp_write && dp_is_op && pend_q);
    HRESP     = 1'b0;
    HRDATA    = '0;
    if (dp_valid && !dp_write) begin
      if (dp_is_cfg)     HRDATA = {27'b0, cfg_q};
      else if (dp_is_op) HRDATA = sat_data;
    end
  end

  // ---- bus rules ----
  a_word_access: assert property (@(posedge HCLK) disable iff (!HRESETn)
    (HSEL && HTRANS[1] && HREADY) |-> (HSIZE == 3'b010));
  a_single_wait: assert property (@(posedge HCLK) disable iff (!HRESETn)
    !HREADYOUT |=> HREADYOUT);
  a_addr_held: assert property (@(posedge HCLK) disable iff (!HRESETn)
    (!HREADY && HSEL && HTRANS[1]) |=> $stable(HADDR) && $stable(HWRITE));

endmodule
