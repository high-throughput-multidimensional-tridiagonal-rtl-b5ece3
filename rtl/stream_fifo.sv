// stream_fifo: small synchronous FIFO with valid/ready on both sides and a fill
// count. Stages that read block RAM (one clock of read latency) issue a read
// only while the FIFO has room for it, so a downstream stall never loses data.
module stream_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned PW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [PW:0]  count
);
  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] rp, wp;
  logic          push, pop;

  assign in_ready  = count < (PW+1)'(DEPTH);
  assign out_valid = count != '0;
  assign out_data  = mem[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
    if (!rst_n) begin
      rp <= '0; wp <= '0; count <= '0;
    end else begin
      if (push) wp <= (wp == PW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == PW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end
endmodule
