// sync_fifo_tb: random pushes and pops (never into a full or out of an
// empty buffer) against a queue model; checks order, empty, full and count.
module sync_fifo_tb;
  localparam int W = 20, D = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic push, pop, empty, full;
  logic [W-1:0] wdata, rdata;
  logic [3:0] count;
  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);
  logic [W-1:0] q [$];
  int checks = 0, failures = 0, fulls = 0;
  initial begin
    push = 0; pop = 0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == D) || int'(count) != q.size()
          || (q.size() > 0 && rdata !== q[0])) begin
        failures++; $display("FAIL at %0d size %0d", i, q.size());
      end
      if (full) fulls++;
      push  = !full && ($urandom % 100) < ((i / 500) % 2 ? 70 : 35);
      pop   = !empty && ($urandom % 100) < 50;
      wdata = W'($urandom);
      @(posedge clk);
      if (pop)  void'(q.pop_front());
      if (push) q.push_back(wdata);
    end
    checks++;
    if (fulls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
