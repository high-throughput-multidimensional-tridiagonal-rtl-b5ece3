// fp_div: pipelined IEEE-754 single-precision divider, y = a / b.
//
// The significand quotient is formed by a 50-by-24-bit integer division that
// yields 27 quotient bits and a remainder (the sticky bit), normalised and
// rounded to nearest even, then carried through LAT register stages: one
// operand pair per clock, result LAT cycles later. The Thomas forward loop uses
// it with a = 1.0 to form the reciprocal r = 1/(b - a*c'). Division by zero
// gives a signed infinity, a zero or subnormal dividend gives zero; these are
// this design's simplifications, as in fp_add.
// The quotient of two significands in [1, 2) lies in (1/2, 2), so only its low
// 27 bits can be non-zero; the upper bits of the 50-bit quotient are left
// unused on purpose (lint reports them as unused).
module fp_div
  import tds_pkg::*;
#(
  parameter int unsigned LAT = LAT_DIV
) (
  input  logic  clk,
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  function automatic fp32_t div_f(fp32_t x, fp32_t z);
    logic        s;
    logic [49:0] num;
    logic [49:0] q;
    logic [23:0] mant;
    logic        g, st, rnd;
    logic [9:0]  e;
    s = x[31] ^ z[31];
    if (x[30:23] == 8'hff) return {s, 8'hff, 23'd0};
    if (z[30:23] == 8'hff) return {s, 31'd0};
    if (z[30:23] == 8'd0) return {s, 8'hff, 23'd0};
    if (x[30:23] == 8'd0) return {s, 31'd0};
    num = {1'b1, x[22:0], 26'd0};
    q   = num / {26'd0, 1'b1, z[22:0]};
    st  = (num % {26'd0, 1'b1, z[22:0]}) != 50'd0;
    e   = {2'b00, x[30:23]} - {2'b00, z[30:23]} + 10'd127;
    if (q[26]) begin
      mant = q[26:3]; g = q[2]; st = st | q[1] | q[0];
    end else begin
      mant = q[25:2]; g = q[1]; st = st | q[0];
      e    = e - 10'd1;
    end
    rnd = g & (st | mant[0]);
    {e, mant} = {e, mant} + {10'd0, 23'd0, rnd};
    if ($signed(e) <= 0) return {s, 31'd0};
    if ($signed(e) >= 255) return {s, 8'hff, 23'd0};
    return {s, e[7:0], mant[22:0]};
  endfunction

  fp32_t pipe [LAT];

  always_ff @(posedge clk) begin
    pipe[0] <= div_f(a, b);
    for (int k = 1; k < int'(LAT); k++) pipe[k] <= pipe[k-1];
  end

  assign y = pipe[LAT-1];

endmodule
