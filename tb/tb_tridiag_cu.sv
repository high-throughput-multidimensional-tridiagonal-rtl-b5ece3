// tb_tridiag_cu: end-to-end testbench for one compute unit at reduced size
// (V = 4 lanes, G = 16 slots, 16 x 8 meshes).
//
// Random right-hand sides for a batch of meshes are streamed in with random
// gaps; results are drained with random back-pressure. The reference solves
// every x-line of each mesh with the textbook Thomas algorithm in double
// precision, then every y-line of that result. Each output element is checked
// at the position given by its out_mesh/out_y/out_j tags. The test also counts
// the mechanisms the design relies on and fails if one never happened:
// input stalls (ping-pong banks full), output stalls, short last groups,
// plane-buffer bank swaps and overlapped transpose blocks.
module tb_tridiag_cu;
  import tb_fp_pkg::*;

  localparam int V = 4, G = 16, NXM = 16, NYM = 16;
  localparam int NX = 16, NY = 8, NB = 100;
  localparam real CA = -0.5, CB = 2.0, CC = -0.5;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [4:0] nx, ny;
  logic [31:0] coef_a, coef_b, coef_c;
  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  logic [31:0] in_beat [V];
  logic [31:0] out_beat [V];
  logic [4:0] out_y, out_j;
  logic [15:0] out_mesh;
  int checks = 0, failures = 0;

  real         ref_u [NB][NY][NX];
  logic [31:0] rhs   [NB][NY][NX];

  tridiag_cu #(.V(V), .G(G), .NX_MAX(NXM), .NY_MAX(NYM)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // constant-coefficient Thomas solve of n values in place
  task automatic thomas_ref(ref real v [NX > NY ? NX : NY], input int n);
    real cs [NX > NY ? NX : NY], ds [NX > NY ? NX : NY], r;
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
    real line [NX > NY ? NX : NY];
    for (int m = 0; m < NB; m++) begin
      for (int y = 0; y < NY; y++)
        for (int x = 0; x < NX; x++) begin
          rhs[m][y][x]   = rand_fp(2);
          ref_u[m][y][x] = fp_to_real(rhs[m][y][x]);
        end
      for (int y = 0; y < NY; y++) begin
        for (int x = 0; x < NX; x++) line[x] = ref_u[m][y][x];
        thomas_ref(line, NX);
        for (int x = 0; x < NX; x++) ref_u[m][y][x] = line[x];
      end
      for (int x = 0; x < NX; x++) begin
        for (int y = 0; y < NY; y++) line[y] = ref_u[m][y][x];
        thomas_ref(line, NY);
        for (int y = 0; y < NY; y++) ref_u[m][y][x] = line[y];
      end
    end
  endtask

  // mechanism counters
  int n_in_stall = 0, n_out_stall = 0, n_short_grp = 0, n_plane_swap = 0, n_tr_overlap = 0;
  always @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready) n_in_stall++;
    if (out_valid && !out_ready) n_out_stall++;
    if (dut.g_xlane[0].u_lane.ld_commit && dut.g_xlane[0].u_lane.ld_s != 4'(G - 1)) n_short_grp++;
    if (dut.g_ylane[0].u_lane.ld_commit && dut.g_ylane[0].u_lane.ld_s != 4'(G - 1)) n_short_grp++;
    if (dut.u_plane.commit) n_plane_swap++;
    if (dut.u_xrd.u_tr.full == 2'b11 || dut.u_xwr.u_tr.full == 2'b11) n_tr_overlap++;
  end

  task automatic send();
    for (int m = 0; m < NB; m++)
      for (int y = 0; y < NY; y++)
        for (int j = 0; j < NX / V; j++) begin
          while ($urandom_range(7) == 0) begin
            in_valid <= 1'b0;
            @(posedge clk);
          end
          in_valid <= 1'b1;
          for (int k = 0; k < V; k++) in_beat[k] <= rhs[m][y][j*V+k];
          in_last <= (m == NB - 1 && y == NY - 1 && j == NX / V - 1);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
        end
    in_valid <= 1'b0;
    in_last  <= 1'b0;
  endtask

  task automatic receive();
    int n = 0;
    // hold the output for a while so that every buffer fills up
    out_ready <= 1'b0;
    repeat (6000) @(posedge clk);
    while (n < NB * NY * NX / V) begin
      out_ready <= ($urandom_range(1) != 0);
      @(posedge clk);
      if (out_valid && out_ready) begin
        for (int k = 0; k < V; k++) begin
          checks++;
          if (!close(fp_to_real(out_beat[k]), ref_u[out_mesh][out_y][out_j*V+k], 1e-4, 1e-6)) begin
            failures++;
            if (failures < 10)
              $display("mesh %0d y %0d x %0d: got %g want %g", out_mesh, out_y, out_j*V+k,
                       fp_to_real(out_beat[k]), ref_u[out_mesh][out_y][out_j*V+k]);
          end
        end
        checks++;
        if (out_last != (n == NB * NY * NX / V - 1)) begin
          failures++;
          $display("out_last wrong at beat %0d", n);
        end
        n++;
      end
    end
    out_ready <= 1'b1;
  endtask

  initial begin
    nx = 5'(NX); ny = 5'(NY);
    coef_a = real_to_fp(CA); coef_b = real_to_fp(CB); coef_c = real_to_fp(CC);
    in_valid = 1'b0; in_last = 1'b0; out_ready = 1'b0;
    for (int k = 0; k < V; k++) in_beat[k] = '0;
    make_ref();
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    fork
      send();
      receive();
    join
    $display("mechanisms: input stalls %0d, output stalls %0d, short groups %0d, plane swaps %0d, transpose overlaps %0d",
             n_in_stall, n_out_stall, n_short_grp, n_plane_swap, n_tr_overlap);
    checks++; if (n_in_stall == 0)   begin failures++; $display("no input stall seen"); end
    checks++; if (n_out_stall == 0)  begin failures++; $display("no output stall seen"); end
    checks++; if (n_short_grp == 0)  begin failures++; $display("no short group seen"); end
    checks++; if (n_plane_swap < 2)  begin failures++; $display("plane buffer never swapped"); end
    checks++; if (n_tr_overlap == 0) begin failures++; $display("transpose blocks never overlapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
