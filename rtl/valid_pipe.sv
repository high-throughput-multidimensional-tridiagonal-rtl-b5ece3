// valid_pipe: LAT-stage shift register for a valid bit, cleared by the
// synchronous active-low reset so that no spurious results leave a pipeline.
module valid_pipe #(
  parameter int unsigned LAT = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic din,
  output logic dout
);
  logic sr [LAT];
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(LAT); k++) sr[k] <= 1'b0;
    end else begin
      sr[0] <= din;
      for (int k = 1; k < int'(LAT); k++) sr[k] <= sr[k-1];
    end
  end
  assign dout = sr[LAT-1];
endmodule
