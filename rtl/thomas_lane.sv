// thomas_lane: one batched, interleaved Thomas solver (one lane of a
// vectorised compute unit).
//
// Systems arrive one after another, row by row (a_i, b_i, c_i, d_i for
// i = 0..n_len-1, with a_0 = c_{n-1} = 0 expected), and are gathered in groups
// of G. Four stages, joined by three ping-pong buffers, work on successive
// groups at the same time:
//   load     writes rows into the input buffer at slot*NMAX + row;
//   forward  walks the group row-major across its G slots (row 0 of every slot,
//            then row 1, ...) through thomas_fwd, writing c', d';
//   backward walks the rows in reverse through thomas_bwd, writing u;
//   unload   reads u back system by system, rows in ascending order.
// Interleaving G slots hides the loop-carried latency of both loops, so each
// stage handles one row per clock and a group takes about G*n_len cycles per
// stage; a batch of B systems leaves after roughly (3 + ceil(B/G)) * G * n_len
// cycles. A group is closed when G systems have arrived or when in_last marks
// the final row of the batch; a short group is still swept over all G slots
// (the unused slots compute on stale data that is never read out), which is
// the ceil(B/G) rounding of the batch.
//
// Interfaces: valid/ready input stream of rows; valid/ready output stream of
// solutions u in the same system and row order, with out_sys_last on each
// system's last row and out_last on the batch's last row. n_len (2..NMAX) must
// be held constant while the lane holds data. The input buffer keeps a, b, c, d
// (four words per row), the middle one c', d', the output one u.
// The output FIFO's in_ready is left unconnected: reads are issued only when
// the FIFO has a free entry for every read in flight, so it never refuses one.
module thomas_lane
  import tds_pkg::*;
#(
  parameter int unsigned G    = 32,
  parameter int unsigned NMAX = 128,
  localparam int unsigned SW  = (G > 1) ? $clog2(G) : 1,
  localparam int unsigned IW  = $clog2(NMAX) + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [IW-1:0] n_len,
  // rows in
  input  logic          in_valid,
  output logic          in_ready,
  input  fp32_t         in_a,
  input  fp32_t         in_b,
  input  fp32_t         in_c,
  input  fp32_t         in_d,
  input  logic          in_last,
  // solutions out
  output logic          out_valid,
  input  logic          out_ready,
  output fp32_t         out_u,
  output logic          out_sys_last,
  output logic          out_last
);

  localparam int unsigned DEPTH = G * NMAX;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned MW    = SW + 2;          // {batch_last, n_sys}
  localparam int unsigned TW    = SW + IW;         // {slot, row} tag

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} sweep_e;

  function automatic logic [AW-1:0] addr(logic [SW-1:0] s, logic [IW-1:0] i);
    return AW'(s * NMAX + i);
  endfunction

  // ---------------------------------------------------------------- load
  logic          in_w_ready, in_r_valid, in_re, in_rel;
  logic [MW-1:0] in_r_meta;
  logic [AW-1:0] in_raddr;
  logic [127:0]  in_rdata;
  logic [SW-1:0] ld_s;
  logic [IW-1:0] ld_i;
  logic          ld_we, ld_sys_end, ld_commit;

  assign in_ready   = in_w_ready;
  assign ld_we      = in_valid && in_w_ready;
  assign ld_sys_end = ld_i == n_len - 1'b1;
  assign ld_commit  = ld_we && ld_sys_end && (ld_s == SW'(G - 1) || in_last);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ld_s <= '0;
      ld_i <= '0;
    end else if (ld_we) begin
      if (ld_sys_end) begin
        ld_i <= '0;
        ld_s <= ld_commit ? '0 : ld_s + 1'b1;
      end else begin
        ld_i <= ld_i + 1'b1;
      end
    end
  end

  pingpong_buf #(.W(128), .DEPTH(DEPTH), .MW(MW)) u_buf_in (
    .clk, .rst_n,
    .w_ready(in_w_ready), .we(ld_we), .waddr(addr(ld_s, ld_i)),
    .wdata({in_a, in_b, in_c, in_d}), .w_commit(ld_commit),
    .w_meta({in_last, (SW+1)'(ld_s) + 1'b1}),
    .r_valid(in_r_valid), .r_meta(in_r_meta), .re(in_re), .raddr(in_raddr),
    .rdata(in_rdata), .r_release(in_rel));

  // ------------------------------------------------------------- forward
  sweep_e        f_st;
  logic [SW-1:0] f_s;
  logic [IW-1:0] f_i;
  logic [5:0]    f_drain;
  logic          f_iss, f_iss_q, f_last_iss;
  logic [SW-1:0] f_s_q;
  logic [IW-1:0] f_i_q;
  logic          mid_w_ready, mid_r_valid, mid_re, mid_rel, mid_commit;
  logic [MW-1:0] mid_r_meta, f_meta;
  logic [AW-1:0] mid_raddr;
  logic [63:0]   mid_rdata;
  logic          fw_valid;
  logic [TW-1:0] fw_tag;
  fp32_t         fw_cs, fw_ds;

  assign f_iss      = f_st == S_RUN;
  assign f_last_iss = f_iss && f_s == SW'(G - 1) && f_i == n_len - 1'b1;
  assign in_re      = f_iss;
  assign in_raddr   = addr(f_s, f_i);
  assign in_rel     = f_last_iss;
  assign mid_commit = f_st == S_DRAIN && f_drain == '0;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      f_st    <= S_IDLE;
      f_s     <= '0;
      f_i     <= '0;
      f_drain <= '0;
      f_iss_q <= 1'b0;
      f_meta  <= '0;
    end else begin
      f_iss_q <= f_iss;
      unique case (f_st)
        S_IDLE: if (in_r_valid && mid_w_ready) begin
          f_st   <= S_RUN;
          f_s    <= '0;
          f_i    <= '0;
          f_meta <= in_r_meta;
        end
        S_RUN: begin
          f_s <= (f_s == SW'(G - 1)) ? '0 : f_s + 1'b1;
          if (f_s == SW'(G - 1)) f_i <= f_i + 1'b1;
          if (f_last_iss) begin
            f_st    <= S_DRAIN;
            f_drain <= 6'(LAT_FWD + 1);
          end
        end
        S_DRAIN: begin
          f_drain <= f_drain - 1'b1;
          if (f_drain == '0) f_st <= S_IDLE;
        end
        default: f_st <= S_IDLE;
      endcase
    end
    f_s_q <= f_s;
    f_i_q <= f_i;
  end

  thomas_fwd #(.G(G), .TW(TW)) u_fwd (
    .clk, .rst_n,
    .in_valid(f_iss_q), .in_sys(f_s_q), .in_first(f_i_q == '0),
    .in_tag({f_s_q, f_i_q}),
    .in_a(in_rdata[127:96]), .in_b(in_rdata[95:64]),
    .in_c(in_rdata[63:32]),  .in_d(in_rdata[31:0]),
    .out_valid(fw_valid), .out_tag(fw_tag), .out_cs(fw_cs), .out_ds(fw_ds));

  pingpong_buf #(.W(64), .DEPTH(DEPTH), .MW(MW)) u_buf_mid (
    .clk, .rst_n,
    .w_ready(mid_w_ready), .we(fw_valid), .waddr(addr(fw_tag[TW-1 -: SW], fw_tag[IW-1:0])),
    .wdata({fw_cs, fw_ds}), .w_commit(mid_commit), .w_meta(f_meta),
    .r_valid(mid_r_valid), .r_meta(mid_r_meta), .re(mid_re), .raddr(mid_raddr),
    .rdata(mid_rdata), .r_release(mid_rel));

  // ------------------------------------------------------------ backward
  sweep_e        b_st;
  logic [SW-1:0] b_s;
  logic [IW-1:0] b_i;
  logic [5:0]    b_drain;
  logic          b_iss, b_iss_q, b_last_iss;
  logic [SW-1:0] b_s_q;
  logic [IW-1:0] b_i_q;
  logic          out_w_ready, out_r_valid, out_re, out_rel, out_commit;
  logic [MW-1:0] out_r_meta, b_meta;
  logic [AW-1:0] out_raddr;
  logic [31:0]   out_rdata;
  logic          bw_valid;
  logic [TW-1:0] bw_tag;
  fp32_t         bw_u;

  assign b_iss      = b_st == S_RUN;
  assign b_last_iss = b_iss && b_s == SW'(G - 1) && b_i == '0;
  assign mid_re     = b_iss;
  assign mid_raddr  = addr(b_s, b_i);
  assign mid_rel    = b_last_iss;
  assign out_commit = b_st == S_DRAIN && b_drain == '0;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      b_st    <= S_IDLE;
      b_s     <= '0;
      b_i     <= '0;
      b_drain <= '0;
      b_iss_q <= 1'b0;
      b_meta  <= '0;
    end else begin
      b_iss_q <= b_iss;
      unique case (b_st)
        S_IDLE: if (mid_r_valid && out_w_ready) begin
          b_st   <= S_RUN;
          b_s    <= '0;
          b_i    <= n_len - 1'b1;
          b_meta <= mid_r_meta;
        end
        S_RUN: begin
          b_s <= (b_s == SW'(G - 1)) ? '0 : b_s + 1'b1;
          if (b_s == SW'(G - 1)) b_i <= b_i - 1'b1;
          if (b_last_iss) begin
            b_st    <= S_DRAIN;
            b_drain <= 6'(LAT_BWD + 1);
          end
        end
        S_DRAIN: begin
          b_drain <= b_drain - 1'b1;
          if (b_drain == '0) b_st <= S_IDLE;
        end
        default: b_st <= S_IDLE;
      endcase
    end
    b_s_q <= b_s;
    b_i_q <= b_i;
  end

  thomas_bwd #(.G(G), .TW(TW)) u_bwd (
    .clk, .rst_n,
    .in_valid(b_iss_q), .in_sys(b_s_q), .in_last(b_i_q == n_len - 1'b1),
    .in_tag({b_s_q, b_i_q}),
    .in_cs(mid_rdata[63:32]), .in_ds(mid_rdata[31:0]),
    .out_valid(bw_valid), .out_tag(bw_tag), .out_u(bw_u));

  pingpong_buf #(.W(32), .DEPTH(DEPTH), .MW(MW)) u_buf_out (
    .clk, .rst_n,
    .w_ready(out_w_ready), .we(bw_valid), .waddr(addr(bw_tag[TW-1 -: SW], bw_tag[IW-1:0])),
    .wdata(bw_u), .w_commit(out_commit), .w_meta(b_meta),
    .r_valid(out_r_valid), .r_meta(out_r_meta), .re(out_re), .raddr(out_raddr),
    .rdata(out_rdata), .r_release(out_rel));

  // -------------------------------------------------------------- unload
  logic [SW:0]   o_s;
  logic [IW-1:0] o_i;
  logic          o_pend, o_sys_last, o_last, o_sys_last_q, o_last_q;
  logic [2:0]    q_cnt;
  logic          o_end_sys, o_end_grp;

  assign o_end_sys = o_i == n_len - 1'b1;
  assign o_end_grp = o_end_sys && o_s == out_r_meta[SW:0] - 1'b1;
  assign out_re    = out_r_valid && ({1'b0, q_cnt} + {3'b0, o_pend}) < 4'd4;
  assign out_raddr = addr(o_s[SW-1:0], o_i);
  assign out_rel   = out_re && o_end_grp;
  assign o_sys_last = o_end_sys;
  assign o_last     = o_end_grp && out_r_meta[MW-1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      o_s    <= '0;
      o_i    <= '0;
      o_pend <= 1'b0;
    end else begin
      o_pend <= out_re;
      if (out_re) begin
        if (o_end_sys) begin
          o_i <= '0;
          o_s <= o_end_grp ? '0 : o_s + 1'b1;
        end else begin
          o_i <= o_i + 1'b1;
        end
      end
    end
    o_sys_last_q <= o_sys_last;
    o_last_q     <= o_last;
  end

  stream_fifo #(.W(34), .DEPTH(4)) u_out_q (
    .clk, .rst_n,
    .in_valid(o_pend), .in_ready(),
    .in_data({out_rdata, o_sys_last_q, o_last_q}),
    .out_valid(out_valid), .out_ready(out_ready),
    .out_data({out_u, out_sys_last, out_last}), .count(q_cnt));

  // in_last may only mark the last row of a system
  assert property (@(posedge clk) disable iff (!rst_n)
                   (in_valid && in_ready && in_last) |-> ld_sys_end)
    else $error("thomas_lane: in_last on a row that does not end a system");

endmodule
