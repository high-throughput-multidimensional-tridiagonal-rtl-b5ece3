// thomas_fwd: forward-elimination datapath of the Thomas algorithm, interleaving
// G independent systems.
//
// For row i of a system it computes
//     r   = 1 / (b_i - a_i * c'_{i-1})
//     d'_i = r * (d_i - a_i * d'_{i-1})
//     c'_i = r * c_i
// with four multipliers, one divider (1/x) and two subtractors, fully
// pipelined over LAT_FWD cycles. Because row i needs row i-1's result, a single
// system could only enter once every LAT_FWD cycles; instead rows of G systems
// are fed round-robin (row i of system 0, row i of system 1, ..., row i of
// system G-1, then row i+1 of system 0, ...), so the dependency distance is G
// cycles and the pipeline accepts a row every clock. The previous c', d' of
// each of the G systems are kept in two G-entry register files, written when a
// result leaves the pipeline and read when the next row of that system enters.
//
// Input: in_valid with the system slot in_sys, in_first for row 0 (the stored
// c', d' are then taken as zero, so row 0 gives d'_0 = d_0/b_0, c'_0 = c_0/b_0),
// the coefficients and a TW-bit tag that travels with the row. Output: the same
// row LAT_FWD cycles later with c', d' and its tag. Rows of one system must be
// at least G cycles apart, which holds when the caller feeds whole groups of G
// slots in order; G > LAT_FWD is required and checked at elaboration.
module thomas_fwd
  import tds_pkg::*;
#(
  parameter int unsigned G  = 32,
  parameter int unsigned TW = 16,
  localparam int unsigned SW = (G > 1) ? $clog2(G) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [SW-1:0] in_sys,
  input  logic          in_first,
  input  logic [TW-1:0] in_tag,
  input  fp32_t         in_a,
  input  fp32_t         in_b,
  input  fp32_t         in_c,
  input  fp32_t         in_d,
  output logic          out_valid,
  output logic [TW-1:0] out_tag,
  output fp32_t         out_cs,
  output fp32_t         out_ds
);

  if (G <= LAT_FWD) begin : g_chk
    $error("thomas_fwd: interleave group G must exceed the forward loop latency");
  end

  fp32_t cprev [G];
  fp32_t dprev [G];
  fp32_t cp, dp;

  // previous row of this system (zero for the first row)
  assign cp = in_first ? FP_ZERO : cprev[in_sys];
  assign dp = in_first ? FP_ZERO : dprev[in_sys];

  // stage A: a*c', a*d'
  fp32_t ac, ad;
  fp_mul #(.LAT(LAT_MUL)) u_mul_ac (.clk, .a(in_a), .b(cp), .y(ac));
  fp_mul #(.LAT(LAT_MUL)) u_mul_ad (.clk, .a(in_a), .b(dp), .y(ad));

  // b, c, d delayed to meet the products
  fp32_t b_a, c_a, d_a;
  delay_line #(.W(96), .LAT(LAT_MUL)) u_dly_a (
    .clk, .din({in_b, in_c, in_d}), .dout({b_a, c_a, d_a}));

  // stage B: b - a*c', d - a*d'
  fp32_t den, num;
  fp_add #(.LAT(LAT_ADD)) u_sub_den (.clk, .a(b_a), .b(fp_neg(ac)), .y(den));
  fp_add #(.LAT(LAT_ADD)) u_sub_num (.clk, .a(d_a), .b(fp_neg(ad)), .y(num));
  fp32_t c_b;
  delay_line #(.W(32), .LAT(LAT_ADD)) u_dly_b (.clk, .din(c_a), .dout(c_b));

  // stage C: r = 1/den
  fp32_t r;
  fp_div #(.LAT(LAT_DIV)) u_recip (.clk, .a(FP_ONE), .b(den), .y(r));
  fp32_t c_c, num_c;
  delay_line #(.W(64), .LAT(LAT_DIV)) u_dly_c (.clk, .din({c_b, num}), .dout({c_c, num_c}));

  // stage D: c' = r*c, d' = r*num
  fp_mul #(.LAT(LAT_MUL)) u_mul_cs (.clk, .a(r), .b(c_c), .y(out_cs));
  fp_mul #(.LAT(LAT_MUL)) u_mul_ds (.clk, .a(r), .b(num_c), .y(out_ds));

  // control: valid, slot and tag follow the data
  logic [SW-1:0] o_sys;
  logic          o_vld;
  delay_line #(.W(TW + SW), .LAT(LAT_FWD)) u_dly_tag (
    .clk, .din({in_tag, in_sys}), .dout({out_tag, o_sys}));
  valid_pipe #(.LAT(LAT_FWD)) u_vld (.clk, .rst_n, .din(in_valid), .dout(o_vld));
  assign out_valid = o_vld;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(G); k++) begin
        cprev[k] <= FP_ZERO;
        dprev[k] <= FP_ZERO;
      end
    end else if (o_vld) begin
      cprev[o_sys] <= out_cs;
      dprev[o_sys] <= out_ds;
    end
  end

endmodule
