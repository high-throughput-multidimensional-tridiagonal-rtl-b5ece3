// tb_tridiag_accel_full: one complete run of the accelerator top with every parameter
// at its default (3 units, V = 8 lanes, G = 32 slots, 128 x 128 meshes), two
// meshes per unit, inputs at full rate and outputs always accepted.
//
// Each compute unit gets its own batch of random right-hand-side meshes; all
// units run at once. The reference solves every x-line of each mesh with the
// textbook Thomas algorithm in double precision and then every y-line of that
// result, and each output element is checked at the position given by the
// unit's out_mesh/out_y/out_j tags (relative 1e-4 plus 1e-6 absolute).
// The run time is compared with the pipeline model: each unit streams
// 2*128*128/8 beats, and five ping-pong stages each add about G*N cycles of
// fill latency, so the run must end within 4*NBEAT + 8*G*128 cycles.
module tb_tridiag_accel_full;
  import tb_fp_pkg::*;

  localparam int NCU = 3, V = 8, G = 32;
  localparam int NX = 128, NY = 128, NB = 2;
  localparam int IW = $clog2(128) + 1, YW = $clog2(128) + 1;
  localparam int NBEAT = NB * NY * NX / V;
  localparam real CA = -0.5, CB = 2.0, CC = -0.5;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [IW-1:0] nx;
  logic [YW-1:0] ny;
  logic [31:0] coef_a, coef_b, coef_c;
  logic in_valid [NCU], in_ready [NCU], in_last [NCU];
  logic out_valid [NCU], out_ready [NCU], out_last [NCU];
  logic [31:0] in_beat [NCU][V];
  logic [31:0] out_beat [NCU][V];
  logic [YW-1:0] out_y [NCU];
  logic [IW-1:0] out_j [NCU];
  logic [15:0] out_mesh [NCU];
  int checks = 0, failures = 0;

  real         ref_u [NCU][NB][NY][NX];
  logic [31:0] rhs   [NCU][NB][NY][NX];

  tridiag_accel  dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NL = NX > NY ? NX : NY;

  task automatic thomas_ref(ref real v [NL], input int n);
    real cs [NL], ds [NL], r;
    cs[0] = CC / CB;
    ds[0] = v[0] / CB;
    for (int i = 1; i < n; i++) begin
      r = 1.0 / (CB - CA * cs[i-1]);
      ds[i] = r * (v[i] - CA * ds[i-1]);
      cs[i] = (i == n - 1) ? 0.0 : r * CC;
    end
    v[n-1] = ds[n-1];
    for (int i = n - 2; i >= 0; i--) v[i] = ds[i] - cs[i] * v[i+1];
  endtask

  task automatic make_ref();
    real line [NL];
    for (int u = 0; u < NCU; u++)
      for (int m = 0; m < NB; m++) begin
        for (int y = 0; y < NY; y++)
          for (int x = 0; x < NX; x++) begin
            rhs[u][m][y][x]   = rand_fp(2);
            ref_u[u][m][y][x] = fp_to_real(rhs[u][m][y][x]);
          end
        for (int y = 0; y < NY; y++) begin
          for (int x = 0; x < NX; x++) line[x] = ref_u[u][m][y][x];
          thomas_ref(line, NX);
          for (int x = 0; x < NX; x++) ref_u[u][m][y][x] = line[x];
        end
        for (int x = 0; x < NX; x++) begin
          for (int y = 0; y < NY; y++) line[y] = ref_u[u][m][y][x];
          thomas_ref(line, NY);
          for (int y = 0; y < NY; y++) ref_u[u][m][y][x] = line[y];
        end
      end
  endtask

  int n_in_stall = 0, n_out_stall = 0, n_short_grp = 0, n_plane_swap = 0, n_tr_overlap = 0;
  int done_cnt = 0;
  longint t_start, t_end;

  for (genvar u = 0; u < NCU; u++) begin : g_drv
    always @(posedge clk) if (rst_n) begin
      if (in_valid[u] && !in_ready[u]) n_in_stall++;
      if (out_valid[u] && !out_ready[u]) n_out_stall++;
      if (dut.g_cu[u].u_cu.g_xlane[0].u_lane.ld_commit &&
          dut.g_cu[u].u_cu.g_xlane[0].u_lane.ld_s != $clog2(G)'(G - 1)) n_short_grp++;
      if (dut.g_cu[u].u_cu.g_ylane[0].u_lane.ld_commit &&
          dut.g_cu[u].u_cu.g_ylane[0].u_lane.ld_s != $clog2(G)'(G - 1)) n_short_grp++;
      if (dut.g_cu[u].u_cu.u_plane.commit) n_plane_swap++;
      if (dut.g_cu[u].u_cu.u_xrd.u_tr.full == 2'b11 || dut.g_cu[u].u_cu.u_xwr.u_tr.full == 2'b11)
        n_tr_overlap++;
    end

    initial begin : send
      wait (rst_n);
      @(posedge clk);
      for (int m = 0; m < NB; m++)
        for (int y = 0; y < NY; y++)
          for (int j = 0; j < NX / V; j++) begin
            while (1'b0) begin
              in_valid[u] <= 1'b0;
              @(posedge clk);
            end
            in_valid[u] <= 1'b1;
            for (int k = 0; k < V; k++) in_beat[u][k] <= rhs[u][m][y][j*V+k];
            in_last[u] <= (m == NB - 1 && y == NY - 1 && j == NX / V - 1);
            @(posedge clk);
            while (!in_ready[u]) @(posedge clk);
          end
      in_valid[u] <= 1'b0;
      in_last[u]  <= 1'b0;
    end

    initial begin : receive
      int n;
      n = 0;
      wait (rst_n);
      out_ready[u] <= 1'b0;
      repeat (1) @(posedge clk);
      while (n < NBEAT) begin
        out_ready[u] <= 1'b1;
        @(posedge clk);
        if (out_valid[u] && out_ready[u]) begin
          for (int k = 0; k < V; k++) begin
            checks++;
            if (!close(fp_to_real(out_beat[u][k]), ref_u[u][int'(out_mesh[u])][int'(out_y[u])][int'(out_j[u])*V+k], 1e-4, 1e-6)) begin
              failures++;
              if (failures < 10)
                $display("cu %0d mesh %0d y %0d x %0d: got %g want %g", u, out_mesh[u], out_y[u],
                         out_j[u]*V+k, fp_to_real(out_beat[u][k]),
                         ref_u[u][int'(out_mesh[u])][int'(out_y[u])][int'(out_j[u])*V+k]);
            end
          end
          checks++;
          if (out_last[u] != (n == NBEAT - 1)) begin
            failures++;
            $display("cu %0d out_last wrong at beat %0d", u, n);
          end
          n++;
        end
      end
      out_ready[u] <= 1'b1;
      done_cnt++;
    end
  end

  initial begin
    nx = IW'(NX); ny = YW'(NY);
    coef_a = real_to_fp(CA); coef_b = real_to_fp(CB); coef_c = real_to_fp(CC);
    for (int u = 0; u < NCU; u++) begin
      in_valid[u] = 1'b0; in_last[u] = 1'b0; out_ready[u] = 1'b0;
      for (int k = 0; k < V; k++) in_beat[u][k] = '0;
    end
    make_ref();
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    t_start = $time / 10;
    wait (done_cnt == NCU);
    t_end = $time / 10;
    $display("%0d units x %0d meshes of %0dx%0d solved in x and y in %0d cycles",
             NCU, NB, NX, NY, t_end - t_start);
    $display("mechanisms: input stalls %0d, output stalls %0d, short groups %0d, plane swaps %0d, transpose overlaps %0d",
             n_in_stall, n_out_stall, n_short_grp, n_plane_swap, n_tr_overlap);
    checks++;
    if (t_end - t_start > 4 * NBEAT + 8 * G * 128) begin
      failures++;
      $display("run took longer than the pipeline model allows");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
