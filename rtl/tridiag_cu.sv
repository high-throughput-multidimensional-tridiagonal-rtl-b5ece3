// tridiag_cu: one compute unit (CU) - a vectorised, batched Thomas solver that
// solves a batch of 2D meshes along x and then along y, with the two solves
// pipelined through an on-chip XY plane buffer.
//
// Data path, one V-element (8 x FP32 = 256-bit) beat per clock:
//   xdim_reader   collect V x-lines, V x V transpose -> lane k gets line k
//   V thomas_lane x-line solves (n = nx), G systems interleaved per lane
//   xdim_writer   V x V transpose back to line-contiguous beats (row y, block j)
//   ydim_plane    XY plane buffer, read per column block along y
//   V thomas_lane y-line solves (n = ny)
//   result beats, tagged with mesh row, block column and mesh number
// The tridiagonal coefficients are generated inside the unit, as in the ADI
// heat-diffusion solver: every row gets a = coef_a, b = coef_b, c = coef_c,
// except a = 0 on the first and c = 0 on the last row of a line. The
// right-hand side d is the mesh data. The unit therefore performs the
// Tridslv(x-dim), Tridslv(y-dim) pair of one ADI time step on each mesh.
//
// Lanes are fed identical control and so run in lock step; lane 0's
// handshake signals stand for all of them (checked by assertions).
// For the same reason the per-system and batch-end flags of lanes 1..V-1,
// and the x-lanes' per-system flag, are left unread (lint lists them as
// unused); the row counters of the transpose and plane stages carry that
// information instead.
// Interface: valid/ready input beats in row-major order, mesh after mesh, with
// in_last on the batch's final beat; valid/ready output beats in column-block
// order (y inner, block column outer) per mesh, with out_y, out_j, out_mesh and
// out_last. nx, ny (multiples of V, at most NX_MAX, NY_MAX) and the
// coefficients are held constant while a batch is in flight.
module tridiag_cu
  import tds_pkg::*;
#(
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
  input  logic          in_valid,
  output logic          in_ready,
  input  fp32_t         in_beat [V],
  input  logic          in_last,
  output logic          out_valid,
  input  logic          out_ready,
  output fp32_t         out_beat [V],
  output logic [YW-1:0] out_y,
  output logic [IW-1:0] out_j,
  output logic [15:0]   out_mesh,
  output logic          out_last
);

  // ------------------------------------------------------------ x solve
  logic          xr_valid, xr_ready, xr_last;
  fp32_t         xr_vec [V];
  logic [IW-1:0] xr_row;

  xdim_reader #(.V(V), .NX_MAX(NX_MAX)) u_xrd (
    .clk, .rst_n, .nx, .in_valid, .in_ready, .in_beat, .in_last,
    .out_valid(xr_valid), .out_ready(xr_ready), .out_vec(xr_vec),
    .out_row(xr_row), .out_last(xr_last));

  fp32_t xa, xc;
  assign xa = (xr_row == '0)          ? FP_ZERO : coef_a;
  assign xc = (xr_row == nx - 1'b1)   ? FP_ZERO : coef_c;

  logic [V-1:0] xl_in_ready, xl_out_valid, xl_sys_last, xl_last;
  fp32_t        xl_u [V];
  logic         xw_in_ready;

  for (genvar k = 0; k < int'(V); k++) begin : g_xlane
    thomas_lane #(.G(G), .NMAX(NX_MAX)) u_lane (
      .clk, .rst_n, .n_len(nx),
      .in_valid(xr_valid), .in_ready(xl_in_ready[k]),
      .in_a(xa), .in_b(coef_b), .in_c(xc), .in_d(xr_vec[k]), .in_last(xr_last),
      .out_valid(xl_out_valid[k]), .out_ready(xw_in_ready), .out_u(xl_u[k]),
      .out_sys_last(xl_sys_last[k]), .out_last(xl_last[k]));
  end
  assign xr_ready = xl_in_ready[0];

  // ----------------------------------------------- x results -> XY plane
  logic          xw_valid, xw_ready, xw_last;
  fp32_t         xw_beat [V];
  logic [YW-1:0] xw_y;
  logic [IW-1:0] xw_j;

  xdim_writer #(.V(V), .NX_MAX(NX_MAX), .NY_MAX(NY_MAX)) u_xwr (
    .clk, .rst_n, .nx, .ny,
    .in_valid(xl_out_valid[0]), .in_ready(xw_in_ready), .in_vec(xl_u), .in_last(xl_last[0]),
    .out_valid(xw_valid), .out_ready(xw_ready), .out_beat(xw_beat),
    .out_y(xw_y), .out_j(xw_j), .out_last(xw_last));

  logic          yp_valid, yp_ready, yp_last;
  fp32_t         yp_vec [V];
  logic [YW-1:0] yp_row;

  ydim_plane #(.V(V), .NX_MAX(NX_MAX), .NY_MAX(NY_MAX)) u_plane (
    .clk, .rst_n, .nx, .ny,
    .in_valid(xw_valid), .in_ready(xw_ready), .in_beat(xw_beat),
    .in_y(xw_y), .in_j(xw_j), .in_last(xw_last),
    .out_valid(yp_valid), .out_ready(yp_ready), .out_vec(yp_vec),
    .out_row(yp_row), .out_last(yp_last));

  // ------------------------------------------------------------ y solve
  fp32_t ya, yc;
  assign ya = (yp_row == '0)        ? FP_ZERO : coef_a;
  assign yc = (yp_row == ny - 1'b1) ? FP_ZERO : coef_c;

  logic [V-1:0] yl_in_ready, yl_out_valid, yl_sys_last, yl_last;

  for (genvar k = 0; k < int'(V); k++) begin : g_ylane
    thomas_lane #(.G(G), .NMAX(NY_MAX)) u_lane (
      .clk, .rst_n, .n_len(ny),
      .in_valid(yp_valid), .in_ready(yl_in_ready[k]),
      .in_a(ya), .in_b(coef_b), .in_c(yc), .in_d(yp_vec[k]), .in_last(yp_last),
      .out_valid(yl_out_valid[k]), .out_ready(out_ready), .out_u(out_beat[k]),
      .out_sys_last(yl_sys_last[k]), .out_last(yl_last[k]));
  end
  assign yp_ready  = yl_in_ready[0];
  assign out_valid = yl_out_valid[0];
  assign out_last  = yl_last[0];

  // output addressing: y (inner), block column, mesh
  logic [IW-1:0] nblk;
  assign nblk = IW'(nx / V);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_y    <= '0;
      out_j    <= '0;
      out_mesh <= '0;
    end else if (out_valid && out_ready) begin
      if (out_last) begin
        out_y    <= '0;
        out_j    <= '0;
        out_mesh <= '0;
      end else if (out_y == ny - 1'b1) begin
        out_y <= '0;
        if (out_j == nblk - 1'b1) begin
          out_j    <= '0;
          out_mesh <= out_mesh + 1'b1;
        end else begin
          out_j <= out_j + 1'b1;
        end
      end else begin
        out_y <= out_y + 1'b1;
      end
    end
  end

  // all lanes of a solve run in lock step
  assert property (@(posedge clk) disable iff (!rst_n)
                   (xl_in_ready == '0 || xl_in_ready == '1) && (xl_out_valid == '0 || xl_out_valid == '1)
                   && (yl_in_ready == '0 || yl_in_ready == '1) && (yl_out_valid == '0 || yl_out_valid == '1))
    else $error("tridiag_cu: solver lanes out of step");
  assert property (@(posedge clk) disable iff (!rst_n) out_valid |-> yl_sys_last[0] == (out_y == ny - 1'b1))
    else $error("tridiag_cu: output row count out of step with the y solve");

endmodule
