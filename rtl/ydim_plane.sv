// ydim_plane: XY-plane buffer and y-dimension read-out of a compute unit.
//
// A y-line is strided in memory, so the solve along y first gathers a whole XY
// plane on chip: line-contiguous beats (V elements of one row y, block column
// j) are written at row y, column j of a ping-pong plane buffer. When a plane
// is complete it is read column block by column block, walking y upwards:
// each beat read then holds element y of V neighbouring y-lines, one per
// solver lane, so no transpose is needed and each lane receives its own line in
// ascending y order. While one plane is read, the next is written. The same
// structure serves a z-dimension solve when XZ planes are written into it.
//
// Input: valid/ready beats with in_y, in_j and in_last (the final beat of the
// batch); a plane is closed by the beat at y = ny-1, j = nx/V-1, so beats of
// one plane may come in any order but planes must not interleave. Output:
// valid/ready vectors of V values, row index out_row, out_last on the final
// row of the batch. Plane buffer: 2 x NY_MAX x NX_MAX/V beats.
// The output FIFO's in_ready is left unconnected: reads are issued only when
// the FIFO has a free entry for every read in flight, so it never refuses one.
module ydim_plane
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
  input  fp32_t         in_beat [V],
  input  logic [YW-1:0] in_y,
  input  logic [IW-1:0] in_j,
  input  logic          in_last,
  output logic          out_valid,
  input  logic          out_ready,
  output fp32_t         out_vec [V],
  output logic [YW-1:0] out_row,
  output logic          out_last
);
  localparam int unsigned BPR   = NX_MAX / V;          // beats per row, max
  localparam int unsigned DEPTH = NY_MAX * BPR;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic [IW-1:0]   nblk;
  logic            w_ready, r_valid, re, rel, commit, we, r_meta;
  logic [AW-1:0]   raddr;
  logic [V*32-1:0] wdata, rdata;

  assign nblk     = IW'(nx / V);
  assign in_ready = w_ready;
  assign we       = in_valid && w_ready;
  assign commit   = we && in_y == ny - 1'b1 && in_j == nblk - 1'b1;

  always_comb for (int k = 0; k < int'(V); k++) wdata[k*32 +: 32] = in_beat[k];

  pingpong_buf #(.W(V*32), .DEPTH(DEPTH), .MW(1)) u_plane (
    .clk, .rst_n,
    .w_ready, .we, .waddr(AW'(in_y * BPR + in_j)), .wdata, .w_commit(commit), .w_meta(in_last),
    .r_valid, .r_meta, .re, .raddr, .rdata, .r_release(rel));

  // read: column block cb (outer), row y (inner)
  logic [IW-1:0] cb;
  logic [YW-1:0] ry, ry_q;
  logic          pend, lst, lst_q;
  logic [2:0]    q_cnt;
  logic [V*32+YW:0] q_data;

  assign re    = r_valid && ({1'b0, q_cnt} + {3'b0, pend}) < 4'd4;
  assign raddr = AW'(ry * BPR + cb);
  assign rel   = re && ry == ny - 1'b1 && cb == nblk - 1'b1;
  assign lst   = rel && r_meta;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cb   <= '0;
      ry   <= '0;
      pend <= 1'b0;
    end else begin
      pend <= re;
      if (re) begin
        if (ry == ny - 1'b1) begin
          ry <= '0;
          cb <= (cb == nblk - 1'b1) ? '0 : cb + 1'b1;
        end else begin
          ry <= ry + 1'b1;
        end
      end
    end
    ry_q  <= ry;
    lst_q <= lst;
  end

  stream_fifo #(.W(V*32 + YW + 1), .DEPTH(4)) u_q (
    .clk, .rst_n, .in_valid(pend), .in_ready(), .in_data({lst_q, ry_q, rdata}),
    .out_valid, .out_ready, .out_data(q_data), .count(q_cnt));

  always_comb for (int k = 0; k < int'(V); k++) out_vec[k] = q_data[k*32 +: 32];
  assign out_row  = q_data[V*32 +: YW];
  assign out_last = q_data[V*32 + YW];
endmodule
