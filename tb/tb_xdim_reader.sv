// tb_xdim_reader: testbench for xdim_reader (V = 4, lines of 16). Beats of
// numbered x-lines are streamed in with random gaps and the output is drained
// under random back-pressure. Output vector for row i of line group g must hold
// element i of lines g*V .. g*V+V-1 in lanes 0..V-1, with out_row = i and
// out_last only on the batch's final row.
module tb_xdim_reader;
  localparam int V = 4, NXM = 16, NX = 16, NLINE = 24;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [4:0] nx, out_row;
  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  logic [31:0] in_beat [V];
  logic [31:0] out_vec [V];
  int checks = 0, failures = 0;

  xdim_reader #(.V(V), .NX_MAX(NXM)) dut (.*);
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
    for (int l = 0; l < NLINE; l++)
      for (int j = 0; j < NX / V; j++) begin
        while ($urandom_range(4) == 0) begin in_valid <= 1'b0; @(posedge clk); end
        in_valid <= 1'b1;
        for (int k = 0; k < V; k++) in_beat[k] <= val(l, j * V + k);
        in_last <= (l == NLINE - 1 && j == NX / V - 1);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
    in_valid <= 1'b0; in_last <= 1'b0;
  endtask

  task automatic receive();
    int g = 0, i = 0;
    while (g < NLINE / V) begin
      out_ready <= $urandom_range(2) != 0;
      @(posedge clk);
      if (out_valid && out_ready) begin
        for (int k = 0; k < V; k++) begin
          checks++;
          if (out_vec[k] != val(g * V + k, i)) begin
            failures++;
            $display("group %0d row %0d lane %0d: %0d want %0d", g, i, k, out_vec[k], val(g*V+k, i));
          end
        end
        checks += 2;
        if (out_row != 5'(i)) begin failures++; $display("out_row %0d want %0d", out_row, i); end
        if (out_last != (g == NLINE / V - 1 && i == NX - 1)) begin failures++; $display("out_last wrong"); end
        if (i == NX - 1) begin i = 0; g++; end else i++;
      end
    end
  endtask

  initial begin
    nx = 5'(NX); in_valid = 0; in_last = 0; out_ready = 0;
    for (int k = 0; k < V; k++) in_beat[k] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    fork send(); receive(); join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
