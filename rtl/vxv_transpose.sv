// vxv_transpose: V x V register-block transpose with double buffering.
//
// V input vectors (rows) of V elements are loaded, one per clock, into a V x V
// register block; the block is then read out as its V columns, one per clock,
// so output vector c holds element c of every input row. Two blocks alternate,
// one loading while the other drains, so the unit accepts and delivers one
// vector per clock in steady state. At the x-dimension input it turns V beats,
// one from each of V x-lines, into V beats that each hold one consecutive
// element of every line, so each of V solver lanes receives its own line; at
// the x-dimension output the same operation turns lane-parallel results back
// into line-contiguous beats.
//
// Elements are EW bits wide so that a flag bit can ride along with the data.
// Both sides use valid/ready; a vector is transferred when both are high.
module vxv_transpose #(
  parameter int unsigned V  = 8,
  parameter int unsigned EW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [EW-1:0] in_vec [V],
  output logic          out_valid,
  input  logic          out_ready,
  output logic [EW-1:0] out_vec [V]
);
  localparam int unsigned CW = (V > 1) ? $clog2(V) : 1;

  logic [EW-1:0] regs [2][V][V];      // [block][row][column]
  logic [1:0]    full;
  logic          lsel, esel;
  logic [CW-1:0] lrow, ecol;
  logic          ld, em;

  assign in_ready  = !full[lsel];
  assign out_valid = full[esel];
  assign ld        = in_valid && in_ready;
  assign em        = out_valid && out_ready;

  always_comb begin
    for (int k = 0; k < int'(V); k++) out_vec[k] = regs[esel][k][ecol];
  end

  always_ff @(posedge clk) begin
    if (ld) regs[lsel][lrow] <= in_vec;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full <= '0;
      lsel <= 1'b0;
      esel <= 1'b0;
      lrow <= '0;
      ecol <= '0;
    end else begin
      if (ld) begin
        if (lrow == CW'(V - 1)) begin
          lrow       <= '0;
          lsel       <= ~lsel;
          full[lsel] <= 1'b1;
        end else begin
          lrow <= lrow + 1'b1;
        end
      end
      if (em) begin
        if (ecol == CW'(V - 1)) begin
          ecol       <= '0;
          esel       <= ~esel;
          full[esel] <= 1'b0;
        end else begin
          ecol <= ecol + 1'b1;
        end
      end
    end
  end
endmodule
