// fp_mul: pipelined IEEE-754 single-precision multiplier, y = a * b.
//
// The 24x24-bit significand product is normalised and rounded to nearest even
// in one combinational step, then carried through LAT register stages: one
// operand pair per clock, result LAT cycles later. Subnormal inputs count as
// zero and results below the normal range become signed zero; overflow gives
// infinity. These are this design's simplifications, as in fp_add.
module fp_mul
  import tds_pkg::*;
#(
  parameter int unsigned LAT = LAT_MUL
) (
  input  logic  clk,
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  function automatic fp32_t mul_f(fp32_t x, fp32_t z);
    logic        s;
    logic [47:0] p;
    logic [23:0] mant;
    logic        g, st, rnd;
    logic [9:0]  e;
    s = x[31] ^ z[31];
    if (x[30:23] == 8'hff || z[30:23] == 8'hff) return {s, 8'hff, 23'd0};
    if (x[30:23] == 8'd0 || z[30:23] == 8'd0) return {s, 31'd0};
    p = {1'b1, x[22:0]} * {1'b1, z[22:0]};
    e = {2'b00, x[30:23]} + {2'b00, z[30:23]} - 10'd127;
    if (p[47]) begin
      mant = p[47:24]; g = p[23]; st = |p[22:0];
      e    = e + 10'd1;
    end else begin
      mant = p[46:23]; g = p[22]; st = |p[21:0];
    end
    rnd = g & (st | mant[0]);
    {e, mant} = {e, mant} + {10'd0, 23'd0, rnd};
    if ($signed(e) <= 0) return {s, 31'd0};
    if ($signed(e) >= 255) return {s, 8'hff, 23'd0};
    return {s, e[7:0], mant[22:0]};
  endfunction

  fp32_t pipe [LAT];

  always_ff @(posedge clk) begin
    pipe[0] <= mul_f(a, b);
    for (int k = 1; k < int'(LAT); k++) pipe[k] <= pipe[k-1];
  end

  assign y = pipe[LAT-1];

endmodule
