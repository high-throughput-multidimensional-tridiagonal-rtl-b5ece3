// tb_ydim_plane: testbench for ydim_plane (V = 4, 16 x 8 planes). Planes are
// written beat by beat (row y, block column j) with random gaps; the output,
// drained under random back-pressure, must walk each plane column block by
// column block and row by row: lane k of the vector for (block cb, row y) holds
// element (y, cb*V+k), out_row = y, and out_last marks the last plane's end.
module tb_ydim_plane;
  localparam int V = 4, NXM = 16, NYM = 16, NX = 16, NY = 8, NP = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [4:0] nx, ny, in_y, in_j, out_row;
  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  logic [31:0] in_beat [V];
  logic [31:0] out_vec [V];
  int checks = 0, failures = 0;

  ydim_plane #(.V(V), .NX_MAX(NXM), .NY_MAX(NYM)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [31:0] val(int p, int y, int x);
    return 32'(p * 100000 + y * 100 + x);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send();
    for (int p = 0; p < NP; p++)
      for (int y = 0; y < NY; y++)
        for (int j = 0; j < NX / V; j++) begin
          while ($urandom_range(4) == 0) begin in_valid <= 1'b0; @(posedge clk); end
          in_valid <= 1'b1; in_y <= 5'(y); in_j <= 5'(j);
          for (int k = 0; k < V; k++) in_beat[k] <= val(p, y, j * V + k);
          in_last <= (p == NP - 1 && y == NY - 1 && j == NX / V - 1);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
        end
    in_valid <= 1'b0; in_last <= 1'b0;
  endtask

  task automatic receive();
    int p = 0, cb = 0, y = 0;
    while (p < NP) begin
      out_ready <= $urandom_range(2) != 0;
      @(posedge clk);
      if (out_valid && out_ready) begin
        for (int k = 0; k < V; k++) begin
          checks++;
          if (out_vec[k] != val(p, y, cb * V + k)) begin
            failures++;
            $display("plane %0d y %0d x %0d: %0d want %0d", p, y, cb*V+k, out_vec[k], val(p, y, cb*V+k));
          end
        end
        checks += 2;
        if (out_row != 5'(y)) begin failures++; $display("out_row %0d want %0d", out_row, y); end
        if (out_last != (p == NP - 1 && cb == NX / V - 1 && y == NY - 1)) begin
          failures++; $display("out_last wrong");
        end
        if (y == NY - 1) begin
          y = 0;
          if (cb == NX / V - 1) begin cb = 0; p++; end else cb++;
        end else y++;
      end
    end
  endtask

  initial begin
    nx = 5'(NX); ny = 5'(NY); in_valid = 0; in_last = 0; out_ready = 0; in_y = 0; in_j = 0;
    for (int k = 0; k < V; k++) in_beat[k] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    fork send(); receive(); join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
