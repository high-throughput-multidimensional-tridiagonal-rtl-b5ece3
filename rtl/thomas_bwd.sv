// thomas_bwd: back-substitution datapath of the Thomas algorithm, interleaving
// G independent systems.
//
// For rows i = N-1 down to 0 it computes u_i = d'_i - c'_i * u_{i+1}, with
// u_{N-1} = d'_{N-1}: one multiplier and one subtractor, pipelined over LAT_BWD
// cycles. As in thomas_fwd, rows of G systems are fed round-robin so that the
// loop-carried u_{i+1} of a system has G cycles to come back; the last u of
// each system slot is held in a G-entry register file.
//
// Input: in_valid, the slot in_sys, in_last for row N-1 (the stored u is then
// taken as zero), c', d' and a tag. Output: u with its tag LAT_BWD cycles
// later. G > LAT_BWD is required and checked at elaboration.
module thomas_bwd
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
  input  logic          in_last,
  input  logic [TW-1:0] in_tag,
  input  fp32_t         in_cs,
  input  fp32_t         in_ds,
  output logic          out_valid,
  output logic [TW-1:0] out_tag,
  output fp32_t         out_u
);

  if (G <= LAT_BWD) begin : g_chk
    $error("thomas_bwd: interleave group G must exceed the backward loop latency");
  end

  fp32_t uprev [G];
  fp32_t up, cu, ds_a;

  assign up = in_last ? FP_ZERO : uprev[in_sys];

  fp_mul #(.LAT(LAT_MUL)) u_mul (.clk, .a(in_cs), .b(up), .y(cu));
  delay_line #(.W(32), .LAT(LAT_MUL)) u_dly (.clk, .din(in_ds), .dout(ds_a));
  fp_add #(.LAT(LAT_ADD)) u_sub (.clk, .a(ds_a), .b(fp_neg(cu)), .y(out_u));

  logic [SW-1:0] o_sys;
  logic          o_vld;
  delay_line #(.W(TW + SW), .LAT(LAT_BWD)) u_dly_tag (
    .clk, .din({in_tag, in_sys}), .dout({out_tag, o_sys}));
  valid_pipe #(.LAT(LAT_BWD)) u_vld (.clk, .rst_n, .din(in_valid), .dout(o_vld));
  assign out_valid = o_vld;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(G); k++) uprev[k] <= FP_ZERO;
    end else if (o_vld) begin
      uprev[o_sys] <= out_u;
    end
  end

endmodule
