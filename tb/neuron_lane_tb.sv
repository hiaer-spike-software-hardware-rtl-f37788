// neuron_lane_tb: drives one lane (LANE = 3, 16 URAM rows) with a random
// mix of writes, sweeps, back-to-back synaptic adds (often to the same row)
// and reads, and checks every sweep spike and read value against a
// per-neuron model that applies the neuron equations itself. Noise of a
// stochastic model follows the same xorshift sequence as the lane's two
// generators.
module neuron_lane_tb;
  import hs_pkg::*;
  localparam int LANE = 3, DEPTH = 16;
  localparam logic [1:0] SWEEP = 0, ADD = 1, WRITE = 2, READ = 3;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  model_t models [NUM_MODELS];
  logic op_valid; logic [1:0] op; logic [4:0] op_k;
  logic signed [WEIGHT_W-1:0] op_weight;
  logic [NEUR_W-1:0] op_data, rd_data;
  logic sweep_valid, rd_valid; logic [1:0] sweep_spike;

  neuron_lane #(.LANE(LANE), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, n_spk = 0, n_sweep = 0;
  longint V [2*DEPTH]; bit S [2*DEPTH];
  logic [31:0] ns [2];

  function automatic logic [31:0] xs(logic [31:0] x);
    x = x ^ (x << 13); x = x ^ (x >> 17); x = x ^ (x << 5); return x;
  endfunction
  function automatic longint w35(longint v); return longint'(vmem_t'(v)); endfunction
  function automatic model_t model_of(int n);
    for (int m = 0; m < NUM_MODELS; m++) if (n < int'(models[m].end_neuron)) return models[m];
    return models[NUM_MODELS-1];
  endfunction

  // expected results, one clock after issue
  bit exp_sw_q, exp_rd_q; logic [1:0] exp_spk_q; logic [NEUR_W-1:0] exp_rd_q_data;

  task automatic issue(logic [1:0] o, int k, int w, logic [NEUR_W-1:0] d);
    longint raw, nz, v; model_t m; int n;
    @(negedge clk);
    // check results of the previous op
    if (exp_sw_q) begin
      checks++;
      if (!sweep_valid || sweep_spike != exp_spk_q) begin failures++; $display("FAIL sweep spikes"); end
    end
    if (exp_rd_q) begin
      checks++;
      if (!rd_valid || rd_data != exp_rd_q_data) begin
        failures++; $display("FAIL read got %h exp %h", rd_data, exp_rd_q_data);
      end
    end
    exp_sw_q = 0; exp_rd_q = 0;
    op_valid = 1; op = o; op_k = 5'(k); op_weight = 16'(w); op_data = d;
    unique case (o)
      SWEEP: begin
        n_sweep++;
        for (int h = 0; h < 2; h++) begin
          int kk;
          kk = (k & ~1) | h;
          n = 16 * kk + LANE;
          m = model_of(n);
          raw = longint'(signed'(17'(ns[h][16:0] | 17'd1)));
          ns[h] = xs(ns[h]);
          if (m.nu >= 0) nz = w35(raw * (longint'(1) << m.nu));
          else if (m.nu <= -17) nz = 0; else nz = raw >>> (-m.nu);
          v = w35(V[kk] + nz);
          S[kk] = v > longint'(m.theta);
          if (S[kk]) begin v = 0; n_spk++; end
          if (m.is_lif) v = w35(v - (v >>> m.lambda)); else v = 0;
          V[kk] = v;
          exp_spk_q[h] = S[kk];
        end
        exp_sw_q = 1;
      end
      ADD:   V[k] = w35(V[k] + w);
      WRITE: begin V[k] = longint'(vmem_t'(d[V_W-1:0])); S[k] = d[V_W]; end
      READ:  begin exp_rd_q = 1; exp_rd_q_data = {S[k], vmem_t'(V[k])}; end
    endcase
  endtask

  initial begin
    op_valid = 0; exp_sw_q = 0; exp_rd_q = 0;
    for (int m = 0; m < NUM_MODELS; m++) models[m] = '0;
    models[0] = '{is_lif: 1, theta: 35'sd40, nu: -6'sd17, lambda: 6'd63, end_neuron: 18'd100};
    models[1] = '{is_lif: 1, theta: 35'sd30, nu: -6'sd17, lambda: 6'd2,  end_neuron: 18'd200};
    models[2] = '{is_lif: 0, theta: 35'sd10, nu: -6'sd14, lambda: 6'd0,  end_neuron: 18'd300};
    models[3] = '{is_lif: 1, theta: 35'sd50, nu: 6'sd1,   lambda: 6'd4,  end_neuron: 18'd600};
    for (int m = 4; m < NUM_MODELS; m++) models[m] = '{1'b0, 35'sd100, -6'sd17, 6'd0, 18'h3ffff};
    for (int h = 0; h < 2; h++) ns[h] = 32'h9E37_79B9 ^ (32'(LANE) << 8) ^ (32'(h) << 16) ^ 32'h5bd1;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int k = 0; k < 2 * DEPTH; k++) issue(WRITE, k, 0, '0);
    for (int i = 0; i < 3000; i++) begin
      int r, k;
      r = $urandom % 100;
      k = (i % 7 < 4) ? (i % 3) : int'($urandom % (2 * DEPTH));
      if (r < 15)      issue(SWEEP, k, 0, '0);
      else if (r < 65) issue(ADD, k, int'($urandom % 41) - 12, '0);
      else if (r < 70) issue(WRITE, k, 0, NEUR_W'({$urandom % 2, 35'(int'($urandom % 101) - 50)}));
      else             issue(READ, k, 0, '0);
      if ($urandom % 5 == 0) begin
        @(negedge clk);
        if (exp_sw_q) begin checks++; if (!sweep_valid || sweep_spike != exp_spk_q) failures++; end
        if (exp_rd_q) begin checks++; if (!rd_valid || rd_data != exp_rd_q_data) failures++; end
        exp_sw_q = 0; exp_rd_q = 0;
        op_valid = 0;
      end
    end
    for (int k = 0; k < 2 * DEPTH; k++) issue(READ, k, 0, '0);
    issue(READ, 0, 0, '0);
    checks++;
    if (n_spk == 0 || n_sweep == 0) begin failures++; $display("FAIL: no spikes"); end
    $display("sweeps=%0d spikes=%0d", n_sweep, n_spk);
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
