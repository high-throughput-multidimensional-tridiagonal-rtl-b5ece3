// xdim_writer: x-dimension output datapath of a compute unit.
//
// The V solver lanes deliver, in lock step, one element of each of V x-lines
// per clock (lane k holds line k of the current group). V such vectors are
// transposed in a V x V register block, which yields V beats that each hold V
// consecutive x elements of a single line, i.e. the line-contiguous layout of
// the mesh again. Each beat is tagged with its mesh row y and its block column
// j so that it can be written at its place in the XY plane buffer that feeds
// the y-dimension solve (or in external memory).
//
// Input: valid/ready vectors of V values, in_last on the batch's final row.
// Output: valid/ready beats with out_y (row of the mesh), out_j (block column)
// and out_last on the final beat of the batch. nx and ny must be multiples of V
// and are held constant while data are in flight.
module xdim_writer
  import tds_pkg::*;
#(
  parameter int unsigned V      = 8,
  parameter int unsigned NX_MAX = 128,
  parameter int unsigned NY_MAX = 128,
  localparam int unsigned IW    = $clog2(NX_MAX) + 1,
  localparam int unsigned YW    = $clog2(NY_MAX) + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [IW-1:0] nx,
  input  logic [YW-1:0] ny,
  input  logic          in_valid,
  output logic          in_ready,
  input  fp32_t         in_vec [V],
  input  logic          in_last,
  output logic          out_valid,
  input  logic          out_ready,
  output fp32_t         out_beat [V],
  output logic [YW-1:0] out_y,
  output logic [IW-1:0] out_j,
  output logic          out_last
);
  localparam int unsigned CW = (V > 1) ? $clog2(V) : 1;

  logic [IW-1:0] nblk;
  logic [IW-1:0] icol;
  logic [32:0]   t_in [V];
  logic [32:0]   t_out [V];
  logic          t_valid;
  logic [CW-1:0] r;
  logic [YW-1:0] ybase;

  assign nblk = IW'(nx / V);

  // the batch-end flag rides on the elements of the last input vector
  always_comb begin
    for (int k = 0; k < int'(V); k++) t_in[k] = {in_last, in_vec[k]};
  end

  vxv_transpose #(.V(V), .EW(33)) u_tr (
    .clk, .rst_n, .in_valid, .in_ready, .in_vec(t_in),
    .out_valid(t_valid), .out_ready, .out_vec(t_out));

  assign out_valid = t_valid;
  always_comb for (int k = 0; k < int'(V); k++) out_beat[k] = t_out[k][31:0];
  assign out_y    = ybase + YW'(r);
  assign out_j    = icol;
  assign out_last = t_out[V-1][32] && r == CW'(V - 1);

  // beat order: line r of the group (inner), block column j, line group
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      r     <= '0;
      icol  <= '0;
      ybase <= '0;
    end else if (t_valid && out_ready) begin
      if (r == CW'(V - 1)) begin
        r <= '0;
        if (icol == nblk - 1'b1) begin
          icol  <= '0;
          ybase <= (ybase + YW'(V) == ny) ? '0 : ybase + YW'(V);
        end else begin
          icol <= icol + 1'b1;
        end
      end else begin
        r <= r + 1'b1;
      end
    end
  end
endmodule
