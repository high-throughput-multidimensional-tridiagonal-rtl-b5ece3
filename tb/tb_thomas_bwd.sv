// tb_thomas_bwd: testbench for thomas_bwd. Random c', d' of G systems are fed
// round-robin from the last row down to row 0, one per clock; each u is
// compared with a double-precision back substitution and must appear exactly
// LAT_BWD cycles after its row entered.
module tb_thomas_bwd;
  import tb_fp_pkg::*;
  localparam int G = 32, N = 7, TW = 16;
  localparam int LAT = tds_pkg::LAT_BWD;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_last, out_valid;
  logic [4:0] in_sys;
  logic [TW-1:0] in_tag, out_tag;
  logic [31:0] in_cs, in_ds, out_u;
  int checks = 0, failures = 0, cyc = 0, n_out = 0;
  logic [31:0] fc [G][N], fd [G][N];
  real u [G][N];
  int t_in [G*N];

  thomas_bwd #(.G(G), .TW(TW)) dut (.*);
  always #5 clk = ~clk;
  always @(negedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int s, i;
    s = int'(out_tag[15:8]); i = int'(out_tag[7:0]);
    checks += 2;
    if (!close(fp_to_real(out_u), u[s][i], 1e-5, 1e-6)) begin
      failures++; $display("u[%0d][%0d] got %g want %g", s, i, fp_to_real(out_u), u[s][i]);
    end
    if (cyc - t_in[i*G+s] != LAT + 1) begin  // drive edge to sampling edge
      failures++; $display("latency %0d, want %0d", cyc - t_in[i*G+s] - 1, LAT);
    end
    n_out++;
  end

  initial begin
    for (int s = 0; s < G; s++) begin
      for (int i = 0; i < N; i++) begin
        fc[s][i] = rand_fp(2);
        fd[s][i] = rand_fp(3);
      end
      u[s][N-1] = fp_to_real(fd[s][N-1]);
      for (int i = N - 2; i >= 0; i--)
        u[s][i] = fp_to_real(fd[s][i]) - fp_to_real(fc[s][i]) * u[s][i+1];
    end
    in_valid = 0; in_last = 0; in_sys = 0; in_tag = 0; in_cs = 0; in_ds = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = N - 1; i >= 0; i--)
      for (int s = 0; s < G; s++) begin
        in_valid <= 1'b1; in_sys <= 5'(s); in_last <= (i == N - 1);
        in_tag <= {8'(s), 8'(i)};
        in_cs <= fc[s][i]; in_ds <= fd[s][i];
        t_in[i*G+s] = cyc;
        @(posedge clk);
      end
    in_valid <= 1'b0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (n_out != G * N) begin failures++; $display("%0d results, want %0d", n_out, G * N); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
