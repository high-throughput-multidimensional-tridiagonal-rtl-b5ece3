// delay_line: W-bit shift register of LAT >= 1 stages without reset, used to
// keep operands and tags aligned with the floating-point operator pipelines.
module delay_line #(
  parameter int unsigned W   = 32,
  parameter int unsigned LAT = 1
) (
  input  logic         clk,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);
  logic [W-1:0] sr [LAT];
  always_ff @(posedge clk) begin
    sr[0] <= din;
    for (int k = 1; k < int'(LAT); k++) sr[k] <= sr[k-1];
  end
  assign dout = sr[LAT-1];
endmodule
