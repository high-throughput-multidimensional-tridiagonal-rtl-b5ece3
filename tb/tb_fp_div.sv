// tb_fp_div: self-checking testbench for fp_div. Random normal operands (and a
// few exact cases) are applied one per clock; each result is expected exactly
// LAT cycles later and must match the double-precision reference within half
// an FP32 unit in the last place (relative 2^-24, plus rounding slack 2^-30).
module tb_fp_div;
  import tb_fp_pkg::*;

  localparam int unsigned LAT = tds_pkg::LAT_DIV;
  localparam int NVEC = 3000;

  logic        clk = 1'b0;
  logic [31:0] a, b, y;
  logic [31:0] qa [NVEC + LAT + 1];
  logic [31:0] qb [NVEC + LAT + 1];
  int checks = 0, failures = 0;

  fp_div dut (.clk(clk), .a(a), .b(b), .y(y));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ra, rb, ry, rr;
    for (int k = 0; k < NVEC + int'(LAT) + 1; k++) begin
      if (k < 4) begin
        qa[k] = 32'h3f800000 + 32'(k << 20); qb[k] = 32'h40000000 - 32'(k << 19);
      end else begin
        qa[k] = rand_fp(20); qb[k] = rand_fp(20);
      end
    end
    for (int k = 0; k < NVEC + int'(LAT); k++) begin
      a <= qa[k]; b <= qb[k];
      @(posedge clk);
      #1;
      if (k >= int'(LAT) - 1) begin
        ra = fp_to_real(qa[k - int'(LAT) + 1]);
        rb = fp_to_real(qb[k - int'(LAT) + 1]);
        rr = ra / rb;
        ry = fp_to_real(y);
        checks++;
        if (!close(ry, rr, 1.0 / 16777216.0 + 1.0 / 1073741824.0, 0.0)) begin
          failures++;
          if (failures < 10)
            $display("mismatch %h op %h: got %h (%g) want %g", qa[k-int'(LAT)+1], qb[k-int'(LAT)+1], y, ry, rr);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
