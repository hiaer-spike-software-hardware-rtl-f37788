// synapse_fetch_tb: random pointers into random synapse regions of a
// behavioural HBM (random stalls, fixed latency). Checks that every
// SYN_WEIGHT word reaches the lane given by its row parity and slot with
// its k and weight (summed per lane and k), that SYN_EMPTY words are
// ignored, that every SYN_OUTPUT word is reported once and in order under
// random backpressure, and that a run of back-to-back rows sustains close
// to one row per clock once the pipeline is full.
// The lane of a slot (slot s of an even row feeds lane s, of an odd row
// lane 8+s) follows the paper's rule that a synapse sits in the slot of
// its postsynaptic neuron; the slot format is this design's own.
module synapse_fetch_tb;
  import hs_pkg::*;
  localparam int ROWS = 512;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic go, ptr_empty, ptr_pop, idle;
  pointer_t ptr_data;
  logic hbm_valid, hbm_ready, hbm_rsp_valid;
  logic [HBM_AW-1:0] hbm_addr;
  logic [HBM_W-1:0] hbm_rsp_data;
  logic [NUM_LANES-1:0] upd_valid;
  logic [K_W-1:0] upd_k [NUM_LANES];
  logic signed [WEIGHT_W-1:0] upd_weight [NUM_LANES];
  logic spk_valid, spk_ready;
  logic [NEURON_ID_W-1:0] spk_id;
  hbm_req_t hreq;

  synapse_fetch #(.RB_DEPTH(4)) dut (.*);
  always_comb begin hreq = '0; hreq.addr = hbm_addr; end
  int stall_pct = 20;
  hbm_model #(.ROWS(ROWS), .LATENCY(4), .STALL(20)) u_hbm (
    .clk, .rst, .req_valid(hbm_valid), .req(hreq), .req_ready(hbm_ready),
    .rsp_valid(hbm_rsp_valid), .rsp_data(hbm_rsp_data));

  int checks = 0, failures = 0;
  longint exp_sum [int], got_sum [int];   // key = lane * 8192 + k
  int exp_spk [$];
  pointer_t pq [$];

  assign ptr_empty = (pq.size() == 0);
  assign ptr_data  = ptr_empty ? '0 : pq[0];

  always @(posedge clk) if (!rst) begin
    if (ptr_pop) void'(pq.pop_front());
    for (int l = 0; l < NUM_LANES; l++) if (upd_valid[l]) begin
      int key;
      key = l * 8192 + int'(upd_k[l]);
      if (!got_sum.exists(key)) got_sum[key] = 0;
      got_sum[key] += upd_weight[l];
    end
    if (spk_valid && spk_ready) begin
      checks++;
      if (exp_spk.size() == 0 || int'(spk_id) != exp_spk[0]) begin
        failures++; $display("FAIL spike %0d", spk_id);
      end
      if (exp_spk.size() != 0) void'(exp_spk.pop_front());
    end
  end

  function automatic logic [31:0] rnd_word();
    synapse_t s;
    int r;
    r = $urandom % 10;
    s = '0;
    if (r < 6) begin s.kind = SYN_WEIGHT; s.k = K_W'($urandom); s.weight = WEIGHT_W'($urandom); end
    else if (r < 9) s.kind = SYN_EMPTY;
    else return {SYN_OUTPUT, 13'd0, 17'($urandom)};
    return s;
  endfunction

  task automatic add_pointer(int start, int rows);
    pointer_t p;
    p.start = HBM_AW'(start); p.rows = PTR_ROWS_W'(rows);
    for (int r = start; r < start + rows; r++)
      for (int s = 0; s < 8; s++) begin
        logic [31:0] w;
        w = u_hbm.mem[r][s*32 +: 32];
        if (w[31:30] == SYN_WEIGHT) begin
          int key;
          key = (8 * (r % 2) + s) * 8192 + int'(w[28:16]);
          if (!exp_sum.exists(key)) exp_sum[key] = 0;
          exp_sum[key] += longint'(signed'(w[15:0]));
        end else if (w[31:30] == SYN_OUTPUT) exp_spk.push_back(int'(w[16:0]));
      end
    pq.push_back(p);
  endtask

  initial begin
    int t0, t1;
    go = 0; spk_ready = 1;
    for (int r = 0; r < ROWS; r++) for (int s = 0; s < 8; s++) u_hbm.mem[r][s*32 +: 32] = rnd_word();
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 120; i++) begin
      int st;
      st = $urandom % (ROWS - 40);
      add_pointer(st, (i % 9 == 0) ? 0 : int'($urandom % 24) + 1);
    end
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      go = ($urandom % 10) != 0;
      spk_ready = ($urandom % 3) != 0;
    end
    @(negedge clk); go = 1; spk_ready = 1;
    repeat (3000) @(posedge clk);
    checks++;
    if (!idle || pq.size() != 0 || exp_spk.size() != 0) begin
      failures++; $display("FAIL: not drained (%0d pointers, %0d spikes left)", pq.size(), exp_spk.size());
    end
    foreach (exp_sum[key]) begin
      checks++;
      if (!got_sum.exists(key) || got_sum[key] != exp_sum[key]) begin
        failures++; $display("FAIL lane %0d k %0d", key / 8192, key % 8192);
      end
    end
    foreach (got_sum[key]) if (!exp_sum.exists(key)) begin
      checks++; failures++; $display("FAIL unexpected update lane %0d k %0d", key / 8192, key % 8192);
    end
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
