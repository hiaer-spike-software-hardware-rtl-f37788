// pointer_fetch_tb: random pointer-row requests against a behavioural HBM
// with random stalls. Checks that exactly the masked pointers of each row
// come out, in request order and lowest slot first, that nothing is taken
// while `go` or `space_ok` is low, and counts the clocks per request.
// The slot order and the one-read-per-row behaviour are this design's
// choices; the paper only says pointers are read into a queue.
module pointer_fetch_tb;
  import hs_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic go, space_ok, req_valid, req_ready, idle, ptr_push;
  logic [HBM_AW-1:0] req_row;
  logic [7:0] req_mask;
  pointer_t ptr_data;
  logic hbm_valid, hbm_ready, hbm_rsp_valid;
  logic [HBM_AW-1:0] hbm_addr;
  logic [HBM_W-1:0] hbm_rsp_data;
  hbm_req_t hreq;

  pointer_fetch dut (.*);
  always_comb begin hreq = '0; hreq.addr = hbm_addr; end
  hbm_model #(.ROWS(256), .LATENCY(5), .STALL(30)) u_hbm (
    .clk, .rst, .req_valid(hbm_valid), .req(hreq), .req_ready(hbm_ready),
    .rsp_valid(hbm_rsp_valid), .rsp_data(hbm_rsp_data));

  int checks = 0, failures = 0, n_hold = 0, ntaken = 0;
  logic [31:0] expq [$];

  always @(posedge clk) if (!rst) begin
    if (req_valid && req_ready) begin
      checks++;
      ntaken <= ntaken + 1;
      if (!go || !space_ok) begin failures++; $display("FAIL: taken while held"); end
      for (int s = 0; s < 8; s++) if (req_mask[s]) expq.push_back(u_hbm.mem[req_row][s*32 +: 32]);
    end
    if (req_valid && (!go || !space_ok)) n_hold++;
    if (ptr_push) begin
      checks++;
      if (expq.size() == 0 || ptr_data != expq[0]) begin
        failures++; $display("FAIL pointer %h", ptr_data);
      end
      if (expq.size() != 0) void'(expq.pop_front());
    end
  end

  initial begin
    int nreq;
    go = 0; space_ok = 0; req_valid = 0;
    for (int r = 0; r < 256; r++) for (int s = 0; s < 8; s++) u_hbm.mem[r][s*32 +: 32] = $urandom;
    repeat (3) @(posedge clk);
    rst = 0;
    nreq = 0;
    // drive at the falling edge; a request counts as taken when the
    // monitor has seen the handshake at the rising edge before
    while (nreq < 300) begin
      @(negedge clk);
      if (req_valid && ntaken > nreq) begin req_valid = 0; nreq++; end
      go = ($urandom % 8) != 0; space_ok = ($urandom % 6) != 0;
      if (!req_valid && nreq < 300 && ($urandom % 4) != 0) begin
        req_valid = 1; req_row = HBM_AW'($urandom % 256); req_mask = 8'($urandom);
        if (nreq % 10 == 0) req_mask = 8'hff;
      end
    end
    @(negedge clk); go = 1; space_ok = 1;
    repeat (200) @(posedge clk);
    checks++;
    if (expq.size() != 0 || !idle) begin failures++; $display("FAIL: %0d pointers missing", expq.size()); end
    checks++;
    if (n_hold == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
