// tb_vxv_transpose: testbench for vxv_transpose. Random V-element vectors go
// in with random gaps and come out under random back-pressure; every output
// vector c of block b must equal column c of the V input vectors of block b.
// A run at full rate checks that one vector per clock passes in steady state.
module tb_vxv_transpose;
  localparam int V = 4, EW = 12, NBLK = 40;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [EW-1:0] in_vec [V];
  logic [EW-1:0] out_vec [V];
  logic [EW-1:0] data [NBLK][V][V];
  int checks = 0, failures = 0;
  bit rnd;

  vxv_transpose #(.V(V), .EW(EW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send();
    for (int b = 0; b < NBLK; b++)
      for (int r = 0; r < V; r++) begin
        while (rnd && $urandom_range(3) == 0) begin in_valid <= 1'b0; @(posedge clk); end
        in_valid <= 1'b1; in_vec <= data[b][r];
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
    in_valid <= 1'b0;
  endtask

  task automatic receive();
    int b = 0, c = 0;
    while (b < NBLK) begin
      out_ready <= !rnd || $urandom_range(2) != 0;
      @(posedge clk);
      if (out_valid && out_ready) begin
        for (int k = 0; k < V; k++) begin
          checks++;
          if (out_vec[k] != data[b][k][c]) begin
            failures++;
            $display("block %0d col %0d elt %0d: %h want %h", b, c, k, out_vec[k], data[b][k][c]);
          end
        end
        if (c == V - 1) begin c = 0; b++; end else c++;
      end
    end
  endtask

  initial begin
    int t0;
    in_valid = 0; out_ready = 0;
    for (int k = 0; k < V; k++) in_vec[k] = '0;
    for (int b = 0; b < NBLK; b++)
      for (int r = 0; r < V; r++)
        for (int c = 0; c < V; c++) data[b][r][c] = EW'($urandom);
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    rnd = 1;
    fork send(); receive(); join
    rnd = 0;
    t0 = $time / 10;
    fork send(); receive(); join
    checks++;
    if ($time / 10 - t0 > NBLK * V + 2 * V + 2) begin
      failures++;
      $display("full-rate run took %0d cycles for %0d vectors", $time / 10 - t0, NBLK * V);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
