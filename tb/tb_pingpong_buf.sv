// tb_pingpong_buf: testbench for pingpong_buf. Fills and commits banks with
// known patterns and metadata, checks that the writer is held off while both
// banks are full, that the reader sees each bank's data (read back in reverse
// address order, one clock of read latency) and metadata, and that releasing
// a bank lets the writer continue, over several bank swaps.
module tb_pingpong_buf;
  localparam int W = 16, DEPTH = 8, MW = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic w_ready, we, w_commit, r_valid, re, r_release;
  logic [2:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [MW-1:0] w_meta, r_meta;
  int checks = 0, failures = 0;

  pingpong_buf #(.W(W), .DEPTH(DEPTH), .MW(MW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic fill(int tag);
    for (int a = 0; a < DEPTH; a++) begin
      we <= 1'b1; waddr <= 3'(a); wdata <= 16'(tag * 256 + a);
      w_commit <= (a == DEPTH - 1); w_meta <= 4'(tag);
      @(posedge clk);
    end
    we <= 1'b0; w_commit <= 1'b0;
  endtask

  task automatic drain(int tag);
    check(r_valid == 1'b1, "bank ready for reading");
    check(r_meta == 4'(tag), "metadata travels with the bank");
    for (int a = DEPTH - 1; a >= 0; a--) begin
      re <= 1'b1; raddr <= 3'(a); r_release <= (a == 0);
      @(posedge clk);
      re <= 1'b0; r_release <= 1'b0;
      #1 check(rdata == 16'(tag * 256 + a), $sformatf("data bank %0d addr %0d", tag, a));
    end
  endtask

  initial begin
    we = 0; w_commit = 0; re = 0; r_release = 0; waddr = 0; raddr = 0; wdata = 0; w_meta = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    check(w_ready && !r_valid, "empty after reset");
    fill(1);
    check(w_ready, "second bank free");
    fill(2);
    #1 check(!w_ready, "writer held off when both banks are full");
    drain(1);
    #1 check(w_ready, "released bank free again");
    fill(3);
    drain(2);
    drain(3);
    #1 check(!r_valid, "reader idle when both banks are empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
