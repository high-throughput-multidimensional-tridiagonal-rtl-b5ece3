// tds_pkg: types and constants shared by the batched Thomas tridiagonal solver.
//
// All arithmetic is IEEE-754 binary32 (FP32), the single-precision configuration
// that the solver is evaluated with at its main design point (8 solver lanes,
// interleave group of 32 systems). The pipeline latencies of the floating-point
// operators are this design's choice; they only need to satisfy the interleave
// rule checked in thomas_fwd/thomas_bwd: the forward and backward loop latency
// must be shorter than the interleave group size G.
package tds_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_ONE  = 32'h3f80_0000;

  // Operator pipeline depths (clock cycles from operands to result).
  localparam int unsigned LAT_ADD = 3;
  localparam int unsigned LAT_MUL = 3;
  localparam int unsigned LAT_DIV = 6;

  // Forward loop: a*c', b-(..), 1/(..), r*(..)   Backward loop: c'*u, d'-(..)
  localparam int unsigned LAT_FWD = 2 * LAT_MUL + LAT_ADD + LAT_DIV;
  localparam int unsigned LAT_BWD = LAT_MUL + LAT_ADD;

  function automatic fp32_t fp_neg(fp32_t x);
    return {~x[31], x[30:0]};
  endfunction

endpackage
