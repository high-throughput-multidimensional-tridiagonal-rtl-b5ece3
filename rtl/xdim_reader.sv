// xdim_reader: x-dimension input datapath of a compute unit.
//
// Mesh data arrive from external memory as V-element beats along the x-lines
// (x is contiguous), so every element of a beat belongs to the same tridiagonal
// system. V consecutive x-lines are collected in an on-chip ping-pong line
// buffer; then, block column by block column, the V beats of block j (one from
// each line) are read into a V x V register block and transposed. Each output
// vector holds one element of every one of the V lines, so solver lane k is fed
// line k of the group, one element per clock and in ascending x order; the
// next V lines go to the lanes as their next systems. While one group of lines
// is transposed out, the next group is written into the other bank.
//
// Input: valid/ready beats of V FP32 values, in_last on the final beat of the
// batch (the line count must be a multiple of V). Output: valid/ready vectors
// of V values, all of row index out_row (0..nx-1) of their line, with out_last
// on the final row of the batch. nx (a multiple of V, at most NX_MAX) is held
// constant while data are in flight. Line buffer: 2 x NX_MAX beats.
// The output FIFO's in_ready is left unconnected: reads are issued only when
// the FIFO has a free entry for every read in flight, so it never refuses one.
module xdim_reader
  import tds_pkg::*;
#(
  parameter int unsigned V      = 8,
  parameter int unsigned NX_MAX = 128,
  localparam int unsigned IW    = $clog2(NX_MAX) + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [IW-1:0] nx,
  input  logic          in_valid,
  output logic          in_ready,
  input  fp32_t         in_beat [V],
  input  logic          in_last,
  output logic          out_valid,
  input  logic          out_ready,
  output fp32_t         out_vec [V],
  output logic [IW-1:0] out_row,
  output logic          out_last
);
  localparam int unsigned BPL   = NX_MAX / V;           // beats per line, max
  localparam int unsigned DEPTH = V * BPL;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned CW    = (V > 1) ? $clog2(V) : 1;
  localparam int unsigned JW    = IW;

  logic [JW-1:0] nblk;
  assign nblk = JW'(nx / V);

  // ------------------------------------------------------- line buffer
  logic          w_ready, r_valid, re, rel, commit;
  logic          r_meta;
  logic [AW-1:0] raddr;
  logic [V*32-1:0] wdata, rdata;
  logic [CW-1:0] wl;
  logic [JW-1:0] wj;
  logic          we;

  always_comb for (int k = 0; k < int'(V); k++) wdata[k*32 +: 32] = in_beat[k];

  assign in_ready = w_ready;
  assign we       = in_valid && w_ready;
  assign commit   = we && wl == CW'(V - 1) && wj == nblk - 1'b1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wl <= '0;
      wj <= '0;
    end else if (we) begin
      if (wj == nblk - 1'b1) begin
        wj <= '0;
        wl <= wl + 1'b1;
      end else begin
        wj <= wj + 1'b1;
      end
    end
  end

  pingpong_buf #(.W(V*32), .DEPTH(DEPTH), .MW(1)) u_lines (
    .clk, .rst_n,
    .w_ready, .we, .waddr(AW'(wl * BPL + wj)), .wdata, .w_commit(commit), .w_meta(in_last),
    .r_valid, .r_meta, .re, .raddr, .rdata, .r_release(rel));

  // ------------------------------------- read block j, line r, in order
  logic [CW-1:0] rr;
  logic [JW-1:0] rj;
  logic          pend, flag, flag_q;
  logic [2:0]    q_cnt;
  logic          q_valid, q_ready;
  logic [V*32:0] q_data;

  assign re    = r_valid && ({1'b0, q_cnt} + {3'b0, pend}) < 4'd4;
  assign raddr = AW'(rr * BPL + rj);
  assign rel   = re && rr == CW'(V - 1) && rj == nblk - 1'b1;
  assign flag  = r_meta && rj == nblk - 1'b1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rr   <= '0;
      rj   <= '0;
      pend <= 1'b0;
    end else begin
      pend <= re;
      if (re) begin
        if (rr == CW'(V - 1)) begin
          rr <= '0;
          rj <= (rj == nblk - 1'b1) ? '0 : rj + 1'b1;
        end else begin
          rr <= rr + 1'b1;
        end
      end
    end
    flag_q <= flag;
  end

  stream_fifo #(.W(V*32 + 1), .DEPTH(4)) u_q (
    .clk, .rst_n, .in_valid(pend), .in_ready(), .in_data({flag_q, rdata}),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_data), .count(q_cnt));

  // ------------------------------------------------------- transpose
  logic [32:0] t_in [V];
  logic [32:0] t_out [V];
  logic        t_valid;

  // the batch-end flag is kept on the last element of each line only
  always_comb begin
    for (int k = 0; k < int'(V); k++)
      t_in[k] = {q_data[V*32] && k == int'(V) - 1, q_data[k*32 +: 32]};
  end

  vxv_transpose #(.V(V), .EW(33)) u_tr (
    .clk, .rst_n, .in_valid(q_valid), .in_ready(q_ready), .in_vec(t_in),
    .out_valid(t_valid), .out_ready(out_ready), .out_vec(t_out));

  assign out_valid = t_valid;
  always_comb for (int k = 0; k < int'(V); k++) out_vec[k] = t_out[k][31:0];
  assign out_last = t_out[0][32];

  always_ff @(posedge clk) begin
    if (!rst_n) out_row <= '0;
    else if (t_valid && out_ready) out_row <= (out_row == nx - 1'b1) ? '0 : out_row + 1'b1;
  end
endmodule
