// tb_xdim_writer: testbench for xdim_writer (V = 4, 16 x 8 meshes). Lane
// vectors (element i of lines g*V .. g*V+V-1) go in; the output beats must hold
// V consecutive x elements of one line, tagged with that line's mesh row
// (line mod ny) and block column, in the order line-of-group, block, group,
// with out_last only on the final beat.
module tb_xdim_writer;
  localparam int V = 4, NXM = 16, NYM = 16, NX = 16, NY = 8, NLINE = 24;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [4:0] nx, ny, out_y, out_j;
  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  logic [31:0] in_vec [V];
  logic [31:0] out_beat [V];
  int checks = 0, failures = 0;

  xdim_writer #(.V(V), .NX_MAX(NXM), .NY_MAX(NYM)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [31:0] val(int line, int x);
    return 32'(line * 1000 + x);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send();
    for (int g = 0; g < NLINE / V; g++)
      for (int i = 0; i < NX; i++) begin
        while ($urandom_range(4) == 0) begin in_valid <= 1'b0; @(posedge clk); end
        in_valid <= 1'b1;
        for (int k = 0; k < V; k++) in_vec[k] <= val(g * V + k, i);
        in_last <= (g == NLINE / V - 1 && i == NX - 1);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
    in_valid <= 1'b0; in_last <= 1'b0;
  endtask

  task automatic receive();
    int g = 0, j = 0, r = 0, line;
    while (g < NLINE / V) begin
      out_ready <= $urandom_range(2) != 0;
      @(posedge clk);
      if (out_valid && out_ready) begin
        line = g * V + r;
        for (int k = 0; k < V; k++) begin
          checks++;
          if (out_beat[k] != val(line, j * V + k)) begin
            failures++;
            $display("line %0d block %0d elt %0d: %0d want %0d", line, j, k, out_beat[k], val(line, j*V+k));
          end
        end
        checks += 3;
        if (out_y != 5'(line % NY)) begin failures++; $display("out_y %0d want %0d", out_y, line % NY); end
        if (out_j != 5'(j)) begin failures++; $display("out_j %0d want %0d", out_j, j); end
        if (out_last != (g == NLINE / V - 1 && j == NX / V - 1 && r == V - 1)) begin
          failures++; $display("out_last wrong");
        end
        if (r == V - 1) begin
          r = 0;
          if (j == NX / V - 1) begin j = 0; g++; end else j++;
        end else r++;
      end
    end
  endtask

  initial begin
    nx = 5'(NX); ny = 5'(NY); in_valid = 0; in_last = 0; out_ready = 0;
    for (int k = 0; k < V; k++) in_vec[k] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    fork send(); receive(); join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
