// fp_add: pipelined IEEE-754 single-precision adder, y = a + b.
//
// The sum is formed in one combinational step (align the smaller operand with a
// sticky bit, add or subtract the 24-bit significands, normalise, round to
// nearest even) and then carried through LAT register stages, so a new operand
// pair is accepted every clock and the result appears LAT cycles later.
// Subnormal inputs are flushed to zero and results below the normal range
// become zero; an infinite or NaN operand is passed through. These
// simplifications are this design's choice: the solver works on well-scaled
// normal numbers. Subtraction is done by flipping the sign of b at the caller.
module fp_add
  import tds_pkg::*;
#(
  parameter int unsigned LAT = LAT_ADD
) (
  input  logic  clk,
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  function automatic fp32_t add_f(fp32_t x, fp32_t z);
    logic        sx, sz, sr;
    logic [7:0]  ex, ez;
    logic [23:0] mx, mz;
    logic [26:0] ax, az;
    logic [27:0] sum;
    logic [8:0]  d;
    logic [9:0]  er;
    logic [23:0] mant;
    logic        rnd;
    int          lz;
    sx = x[31]; sz = z[31];
    ex = x[30:23]; ez = z[30:23];
    if (ex == 8'hff) return x;
    if (ez == 8'hff) return z;
    if (ex == 8'd0 && ez == 8'd0) return FP_ZERO;
    if (ex == 8'd0) return z;
    if (ez == 8'd0) return x;
    // order operands so that |x| >= |z|
    if (x[30:0] < z[30:0]) begin
      {sx, ex, mx} = {z[31], z[30:23], 1'b1, z[22:0]};
      {sz, ez, mz} = {x[31], x[30:23], 1'b1, x[22:0]};
    end else begin
      mx = {1'b1, x[22:0]};
      mz = {1'b1, z[22:0]};
    end
    d  = {1'b0, ex} - {1'b0, ez};
    ax = {mx, 3'b000};
    az = {mz, 3'b000};
    if (d >= 9'd27) az = 27'd1;                          // only sticky remains
    else if (d != 9'd0) az = (az >> d) | 27'((az & ((27'd1 << d) - 27'd1)) != 27'd0);
    sr = sx;
    er = {2'b00, ex};
    if (sx == sz) begin
      sum = {1'b0, ax} + {1'b0, az};
      if (sum[27]) begin
        sum = {1'b0, sum[27:2], sum[1] | sum[0]};
        er  = er + 10'd1;
      end
    end else begin
      sum = {1'b0, ax} - {1'b0, az};
      if (sum == 28'd0) return FP_ZERO;
      lz = 0;
      for (int k = 26; k >= 0; k--) begin
        if (sum[k]) break;
        lz++;
      end
      sum = sum << lz;
      er  = er - 10'(lz);
    end
    if ($signed(er) <= 0) return {sr, 31'd0};
    mant = sum[26:3];
    rnd  = sum[2] & (sum[1] | sum[0] | mant[0]);
    {er, mant} = {er, mant} + {10'd0, 23'd0, rnd};  // carry into the exponent
    if (er >= 10'd255) return {sr, 8'hff, 23'd0};
    return {sr, er[7:0], mant[22:0]};
  endfunction

  fp32_t pipe [LAT];

  always_ff @(posedge clk) begin
    pipe[0] <= add_f(a, b);
    for (int k = 1; k < int'(LAT); k++) pipe[k] <= pipe[k-1];
  end

  assign y = pipe[LAT-1];

endmodule
