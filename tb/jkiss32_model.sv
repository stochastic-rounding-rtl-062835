// jkiss32_model: behavioural model of the 32-bit KISS pseudorandom generator
// that feeds the accelerator's stochastic rounding.
//
// Implements the published JKISS32 recurrence (xorshift y, add-with-carry z/w,
// Weyl sequence x; output x + y + w) with its usual seeds. rng_o shows the
// current word; a cycle with next_i high advances to the next word. The real
// generator of the target chip differs in one widened internal variable, which
// is not modelled. Testbench use only.
module jkiss32_model (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        next_i,
  output logic [31:0] rng_o
);

  logic [31:0] x, y, z, w;
  logic        c;

  task automatic step();
    logic [31:0] yy, t;
    yy = y ^ (y << 5);
    yy = yy ^ (yy >> 7);
    yy = yy ^ (yy << 22);
    y  = yy;
    t  = z + w + 32'(c);
    z  = w;
    c  = t[31];
    w  = t & 32'h7FFF_FFFF;
    x  = x + 32'd1411392427;
  endtask

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x = 32'd123456789; y = 32'd234567891; z = 32'd345678912; w = 32'd456789123; c = 1'b0;
      step();
    end else if (next_i) begin
      step();
    end
  end

  assign rng_o = x + y + w;

endmodule
