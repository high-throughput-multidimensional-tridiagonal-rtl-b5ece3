// tridiag_accel: the accelerator top - NCU independent compute units, each a
// vectorised batched Thomas solver (tridiag_cu) doing the x- then y-dimension
// solves of its own batch of 2D meshes.
//
// The units share nothing but clock, reset and the run configuration (mesh
// size and tridiagonal coefficients); each has its own input and output beat
// stream, which on the target board is served by its own high-bandwidth-memory
// channel through memory-mapped read/write engines that are not part of this
// RTL. Replicating units is how the design scales with the number of memory
// channels. NCU = 3 with V = 8 lanes and G = 32 interleaved systems per lane
// follows the FP32 2D ADI configuration; the memory engines, the host
// interface and the explicit RHS stencil stage of the ADI time step are outside.
module tridiag_accel
  import tds_pkg::*;
#(
  parameter int unsigned NCU    = 3,
  parameter int unsigned V      = 8,
  parameter int unsigned G      = 32,
  parameter int unsigned NX_MAX = 128,
  parameter int unsigned NY_MAX = 128,
  localparam int unsigned IW    = $clog2(NX_MAX) + 1,
  localparam int unsigned YW    = $clog2(NY_MAX) + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [IW-1:0] nx,
  input  logic [YW-1:0] ny,
  input  fp32_t         coef_a,
  input  fp32_t         coef_b,
  input  fp32_t         coef_c,
  input  logic          in_valid  [NCU],
  output logic          in_ready  [NCU],
  input  fp32_t         in_beat   [NCU][V],
  input  logic          in_last   [NCU],
  output logic          out_valid [NCU],
  input  logic          out_ready [NCU],
  output fp32_t         out_beat  [NCU][V],
  output logic [YW-1:0] out_y     [NCU],
  output logic [IW-1:0] out_j     [NCU],
  output logic [15:0]   out_mesh  [NCU],
  output logic          out_last  [NCU]
);
  for (genvar u = 0; u < int'(NCU); u++) begin : g_cu
    tridiag_cu #(.V(V), .G(G), .NX_MAX(NX_MAX), .NY_MAX(NY_MAX)) u_cu (
      .clk, .rst_n, .nx, .ny, .coef_a, .coef_b, .coef_c,
      .in_valid(in_valid[u]), .in_ready(in_ready[u]), .in_beat(in_beat[u]),
      .in_last(in_last[u]),
      .out_valid(out_valid[u]), .out_ready(out_ready[u]), .out_beat(out_beat[u]),
      .out_y(out_y[u]), .out_j(out_j[u]), .out_mesh(out_mesh[u]), .out_last(out_last[u]));
  end
endmodule
