// tb_thomas_fwd: testbench for thomas_fwd. Rows of G random systems are fed
// round-robin (row i of every slot, then row i+1), one per clock, and each
// result c', d' is compared with a double-precision forward elimination. The
// result of every row must appear exactly LAT_FWD cycles after it entered.
module tb_thomas_fwd;
  import tb_fp_pkg::*;
  localparam int G = 32, N = 6, TW = 16;
  localparam int LAT = tds_pkg::LAT_FWD;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_first, out_valid;
  logic [4:0] in_sys;
  logic [TW-1:0] in_tag, out_tag;
  logic [31:0] in_a, in_b, in_c, in_d, out_cs, out_ds;
  int checks = 0, failures = 0, cyc = 0, n_out = 0;
  logic [31:0] fa [G][N], fb [G][N], fc [G][N], fd [G][N];
  real cs [G][N], ds [G][N];
  int t_in [G*N];

  thomas_fwd #(.G(G), .TW(TW)) dut (.*);
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
    checks += 3;
    if (!close(fp_to_real(out_cs), cs[s][i], 1e-5, 1e-7)) begin
      failures++; $display("c'[%0d][%0d] got %g want %g", s, i, fp_to_real(out_cs), cs[s][i]);
    end
    if (!close(fp_to_real(out_ds), ds[s][i], 1e-5, 1e-7)) begin
      failures++; $display("d'[%0d][%0d] got %g want %g", s, i, fp_to_real(out_ds), ds[s][i]);
    end
    if (cyc - t_in[i*G+s] != LAT + 1) begin  // drive edge to sampling edge
      failures++; $display("latency %0d, want %0d", cyc - t_in[i*G+s] - 1, LAT);
    end
    n_out++;
  end

  initial begin
    real a, b, c, d, r;
    for (int s = 0; s < G; s++)
      for (int i = 0; i < N; i++) begin
        fa[s][i] = (i == 0) ? 32'd0 : rand_fp(1);
        fc[s][i] = rand_fp(1);
        fb[s][i] = real_to_fp(5.0 + $urandom_range(50) / 10.0);
        fd[s][i] = rand_fp(3);
        a = fp_to_real(fa[s][i]); b = fp_to_real(fb[s][i]);
        c = fp_to_real(fc[s][i]); d = fp_to_real(fd[s][i]);
        if (i == 0) begin
          cs[s][0] = c / b; ds[s][0] = d / b;
        end else begin
          r = 1.0 / (b - a * cs[s][i-1]);
          ds[s][i] = r * (d - a * ds[s][i-1]);
          cs[s][i] = r * c;
        end
      end
    in_valid = 0; in_first = 0; in_sys = 0; in_tag = 0;
    in_a = 0; in_b = 0; in_c = 0; in_d = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < N; i++)
      for (int s = 0; s < G; s++) begin
        in_valid <= 1'b1; in_sys <= 5'(s); in_first <= (i == 0);
        in_tag <= {8'(s), 8'(i)};
        in_a <= fa[s][i]; in_b <= fb[s][i]; in_c <= fc[s][i]; in_d <= fd[s][i];
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
