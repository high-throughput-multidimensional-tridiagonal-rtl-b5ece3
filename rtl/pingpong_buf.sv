// pingpong_buf: two-bank (ping-pong, double) buffer between two pipeline stages.
//
// The solver's forward and backward loops walk a system in opposite directions,
// so a FIFO cannot connect them; instead each stage boundary has addressable
// memory split into two banks. The producer fills one bank at any addresses it
// likes and closes it with w_commit (attaching MW bits of metadata); the
// consumer then reads that bank at any addresses while the producer fills the
// other one. When the consumer is done it pulses r_release and the bank becomes
// free again. The first read of a run therefore waits for the first complete
// write, and the memory is twice the size of one working set.
//
// Write side: w_ready says the current write bank is free; we/waddr/wdata write
// it; w_commit hands it to the reader (may coincide with the last write).
// Read side: r_valid says the current read bank holds committed data, with its
// r_meta; re/raddr read it and rdata is valid on the following clock (a
// registered, block-RAM style read); r_release frees it. The memory is one
// simple dual-port array of 2*DEPTH words.
module pingpong_buf #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned MW    = 8,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // producer
  output logic          w_ready,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          w_commit,
  input  logic [MW-1:0] w_meta,
  // consumer
  output logic          r_valid,
  output logic [MW-1:0] r_meta,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata,
  input  logic          r_release
);

  logic [W-1:0]  mem [2*DEPTH];
  logic [1:0]    full;
  logic [MW-1:0] meta [2];
  logic          wsel, rsel;

  assign w_ready = !full[wsel];
  assign r_valid = full[rsel];
  assign r_meta  = meta[rsel];

  always_ff @(posedge clk) begin
    if (we) mem[{wsel, waddr}] <= wdata;
    if (re) rdata <= mem[{rsel, raddr}];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full    <= '0;
      wsel    <= 1'b0;
      rsel    <= 1'b0;
      meta[0] <= '0;
      meta[1] <= '0;
    end else begin
      if (w_commit) begin
        full[wsel] <= 1'b1;
        meta[wsel] <= w_meta;
        wsel       <= ~wsel;
      end
      if (r_release) begin
        full[rsel] <= 1'b0;
        rsel       <= ~rsel;
      end
    end
  end

  // A bank may only be written or closed while it is free, and only read or
  // released while it is full.
  assert property (@(posedge clk) disable iff (!rst_n) (we || w_commit) |-> w_ready)
    else $error("pingpong_buf: write to a bank that is still being read");
  assert property (@(posedge clk) disable iff (!rst_n) (re || r_release) |-> r_valid)
    else $error("pingpong_buf: read from a bank that holds no data");

endmodule
