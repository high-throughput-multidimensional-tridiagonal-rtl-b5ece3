// tb_thomas_lane: self-checking testbench for thomas_lane.
//
// Builds random diagonally dominant tridiagonal systems, solves them in double
// precision with the textbook Thomas algorithm, streams them through the lane
// and compares every solution value (relative 1e-4 plus 1e-6 absolute). Run 1
// sends a batch of B = 2.3 groups at full rate with the output always ready and
// checks the cycle count against (3 + ceil(B/G)) * G * N plus pipeline drain.
// Run 2 sends another batch with random input gaps and output back-pressure.
module tb_thomas_lane;
  import tb_fp_pkg::*;

  localparam int G = 16, NMAX = 16, N = 12;
  localparam int BMAX = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [4:0] n_len;
  logic in_valid, in_ready, in_last, out_valid, out_ready, out_sys_last, out_last;
  logic [31:0] in_a, in_b, in_c, in_d, out_u;
  int checks = 0, failures = 0;

  real A [BMAX*N], Bc [BMAX*N], C [BMAX*N], D [BMAX*N], U [BMAX*N];
  logic [31:0] fa [BMAX*N], fb [BMAX*N], fc [BMAX*N], fd [BMAX*N];

  thomas_lane #(.G(G), .NMAX(NMAX)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic make_batch(int nb);
    real cs [N], ds [N], r;
    for (int s = 0; s < nb; s++) begin
      for (int i = 0; i < N; i++) begin
        fa[s*N+i] = (i == 0)     ? 32'd0 : rand_fp(1);
        fc[s*N+i] = (i == N - 1) ? 32'd0 : rand_fp(1);
        fb[s*N+i] = real_to_fp((4.0 + $urandom_range(100) / 25.0) * (($urandom & 1) ? 1.0 : -1.0));
        fd[s*N+i] = rand_fp(3);
        A[s*N+i] = fp_to_real(fa[s*N+i]); Bc[s*N+i] = fp_to_real(fb[s*N+i]);
        C[s*N+i] = fp_to_real(fc[s*N+i]); D[s*N+i] = fp_to_real(fd[s*N+i]);
      end
      // reference Thomas solve
      cs[0] = C[s*N] / Bc[s*N];
      ds[0] = D[s*N] / Bc[s*N];
      for (int i = 1; i < N; i++) begin
        r = 1.0 / (Bc[s*N+i] - A[s*N+i] * cs[i-1]);
        ds[i] = r * (D[s*N+i] - A[s*N+i] * ds[i-1]);
        cs[i] = r * C[s*N+i];
      end
      U[s*N+N-1] = ds[N-1];
      for (int i = N - 2; i >= 0; i--) U[s*N+i] = ds[i] - cs[i] * U[s*N+i+1];
    end
  endtask

  int  n_out;
  bit  gaps, bp;

  task automatic send(int nb);
    for (int k = 0; k < nb * N; k++) begin
      while (gaps && ($urandom_range(3) == 0)) begin
        in_valid <= 1'b0;
        @(posedge clk);
      end
      in_valid <= 1'b1;
      in_a <= fa[k]; in_b <= fb[k]; in_c <= fc[k]; in_d <= fd[k];
      in_last <= (k == nb * N - 1);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    in_valid <= 1'b0;
    in_last  <= 1'b0;
  endtask

  task automatic receive(int nb);
    n_out = 0;
    while (n_out < nb * N) begin
      out_ready <= !bp || ($urandom_range(2) != 0);
      @(posedge clk);
      if (out_valid && out_ready) begin
        checks++;
        if (!close(fp_to_real(out_u), U[n_out], 1e-4, 1e-6)) begin
          failures++;
          if (failures < 10) $display("u[%0d] got %g want %g", n_out, fp_to_real(out_u), U[n_out]);
        end
        checks++;
        if (out_sys_last != ((n_out % N) == N - 1) || out_last != (n_out == nb * N - 1)) begin
          failures++;
          $display("flag error at %0d", n_out);
        end
        n_out++;
      end
    end
    out_ready <= 1'b1;
  endtask

  initial begin
    int nb, t0, t1, bound;
    n_len = 5'(N);
    in_valid = 1'b0; in_last = 1'b0; out_ready = 1'b1;
    in_a = '0; in_b = '0; in_c = '0; in_d = '0;
    gaps = 0; bp = 0;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    // run 1: full rate
    nb = 37;
    make_batch(nb);
    t0 = $time / 10;
    fork
      send(nb);
      receive(nb);
    join
    t1 = $time / 10;
    bound = (3 + (nb + G - 1) / G) * G * N + 4 * (tds_pkg::LAT_FWD + 8);
    checks++;
    if (t1 - t0 > bound) begin
      failures++;
      $display("run 1 took %0d cycles, bound %0d", t1 - t0, bound);
    end
    $display("run 1: %0d systems of %0d rows in %0d cycles (model %0d)", nb, N,
             t1 - t0, (3 + (nb + G - 1) / G) * G * N);

    // run 2: gaps and back-pressure
    gaps = 1; bp = 1;
    nb = 50;
    make_batch(nb);
    fork
      send(nb);
      receive(nb);
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
