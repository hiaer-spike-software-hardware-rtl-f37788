// hiaer_core_mlp_tb: the smallest MNIST workload of the evaluation run on
// the core at its default sizes (no parameter overrides): a binary-neuron
// MLP 784 -> 128 -> 10. It has 784 axons (one per pixel of a binarized
// 28x28 image), 138 neurons and 784*128 + 128*10 = 101,632 weights, the
// sizes of the published network. The trained weights are not available,
// so the weights are random int16 values in [-60, 60] and the images are
// random binary images with about 20% of the pixels set. What is checked
// is the core, not the accuracy: every output spike and every membrane
// after every step is compared with the bench's reference model.
//
// Each image is presented for one step (its pixels set as input axons),
// followed by two steps without input, so its spikes pass the hidden layer
// (next step) and reach the output layer (the step after). The hidden and
// output neurons are binary neurons (threshold 0, no noise), the 10 output
// neurons carry output markers, and the predicted class of an image is the
// lowest output neuron that spiked. Per image the bench prints the class
// and the cycle and HBM-row counts the core reported for the three steps,
// the two figures from which latency and HBM energy per inference are
// estimated. The host model, the HBM layout compiler and the reference
// model are those of hiaer_core_tb.
module hiaer_core_mlp_tb;
  import hs_pkg::*;

  localparam int HROWS    = 524288;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic      cmd_valid, cmd_ready, rsp_valid, rsp_ready, busy;
  host_cmd_t cmd;
  host_rsp_t rsp;
  logic      hbm_req_valid, hbm_req_ready, hbm_rsp_valid;
  hbm_req_t  hbm_req;
  logic [HBM_W-1:0] hbm_rsp_data;

  hiaer_core dut (
    .clk, .rst, .cmd_valid, .cmd, .cmd_ready, .rsp_valid, .rsp, .rsp_ready,
    .hbm_req_valid, .hbm_req, .hbm_req_ready, .hbm_rsp_valid, .hbm_rsp_data, .busy
  );

  hbm_model #(.ROWS(HROWS), .LATENCY(6), .STALL(20)) u_hbm (
    .clk, .rst, .req_valid(hbm_req_valid), .req(hbm_req), .req_ready(hbm_req_ready),
    .rsp_valid(hbm_rsp_valid), .rsp_data(hbm_rsp_data)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_sweep_spikes = 0, n_axon_events = 0, n_phase_switch = 0, n_out_spikes = 0;
  int n_multi_seg = 0, n_hbm_stall = 0, n_rsp_stall = 0, n_noisy = 0, n_leak = 0;
  int n_ann_clear = 0, n_empty_region = 0;
  logic prev_ph2;
  always @(posedge clk) begin
    if (hbm_req_valid && !hbm_req_ready) n_hbm_stall++;
    if (rsp_valid && !rsp_ready) n_rsp_stall++;
    prev_ph2 <= dut.u_sf.go;
    if (prev_ph2 && dut.u_pf.go) n_phase_switch++;
  end

  // ---------------- network description ----------------
  int NA, NN;
  typedef struct { int post; int w; } syn_t;
  syn_t ax_syn [][$];
  syn_t nr_syn [][$];
  bit   is_out [];
  model_t mdl [NUM_MODELS];
  int   nmodels;
  int   AXB, NRB;
  bit   models_from_hbm = 1;   // load the model table from HBM, not by command
  int   model_row, n_model_loads = 0;

  // ---------------- host access ----------------
  task automatic send(input cmd_op_e op, input logic [31:0] idx, input logic [95:0] data);
    @(negedge clk);
    cmd_valid = 1; cmd.op = op; cmd.idx = idx; cmd.data = data;
    do @(posedge clk); while (!cmd_ready);
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic get_rsp(output host_rsp_t r);
    forever begin
      @(negedge clk);
      rsp_ready = ($urandom % 4) != 0;
      @(posedge clk);
      if (rsp_valid && rsp_ready) begin r = rsp; break; end
    end
    @(negedge clk);
    rsp_ready = 0;
  endtask

  // ---------------- compiler: HBM layout ----------------
  int next_row;
  logic [SLOT_W-1:0] img [int];   // sparse HBM image: key = row*8 + slot

  function automatic logic [SLOT_W-1:0] syn_word(int post, int w);
    synapse_t s;
    s.kind = SYN_WEIGHT; s.rsvd = 0; s.k = K_W'(post >> 4); s.weight = WEIGHT_W'(w);
    return s;
  endfunction

  // lay out one region; returns the pointer
  function automatic pointer_t place(syn_t l [$], bit out, int pre);
    int cnt [16];
    int segs, lane, seg, row;
    pointer_t p;
    foreach (cnt[i]) cnt[i] = 0;
    foreach (l[i]) cnt[l[i].post % 16]++;
    segs = 0;
    foreach (cnt[i]) if (cnt[i] > segs) segs = cnt[i];
    if (out) begin
      lane = -1;
      foreach (cnt[i]) if (lane < 0 && cnt[i] < segs) lane = i;
      if (lane < 0) begin segs++; lane = 0; end
    end
    if (segs == 0 && pre >= 0) begin segs = 1; n_empty_region++; end  // neuron with no synapses
    if (segs > 1) n_multi_seg++;
    p.start = HBM_AW'(next_row);
    p.rows  = PTR_ROWS_W'(2 * segs);
    foreach (cnt[i]) cnt[i] = 0;
    foreach (l[i]) begin
      lane = l[i].post % 16; seg = cnt[lane]++;
      row  = next_row + 2 * seg + lane / 8;
      img[row * 8 + lane % 8] = syn_word(l[i].post, l[i].w);
    end
    if (out) begin
      lane = -1;
      foreach (cnt[i]) if (lane < 0 && cnt[i] < segs) lane = i;
      seg = cnt[lane];
      row = next_row + 2 * seg + lane / 8;
      img[row * 8 + lane % 8] = {SYN_OUTPUT, 13'd0, 17'(pre)};
    end
    next_row += 2 * segs;
    return p;
  endfunction

  task automatic load_network();
    pointer_t p;
    img.delete();
    AXB = 0;
    NRB = 2 * ((NA + 15) / 16);
    next_row = NRB + 2 * ((NN + 15) / 16);
    for (int a = 0; a < NA; a++) begin
      p = place(ax_syn[a], 0, -1);
      if (ax_syn[a].size() == 0) p.rows = 0;
      img[(AXB + a / 8) * 8 + a % 8] = p;
    end
    for (int n = 0; n < NN; n++) begin
      // neurons with nothing to send get a zero-row pointer, except every
      // 7th, which gets an empty segment
      if (nr_syn[n].size() == 0 && !is_out[n] && (n % 7) != 0) p = '0;
      else p = place(nr_syn[n], is_out[n], n);
      img[(NRB + n / 8) * 8 + n % 8] = p;
    end
    // model table in HBM, one model per row in slots 0-2
    if (models_from_hbm) begin
      model_row = next_row;
      for (int m = 0; m < NUM_MODELS; m++)
        for (int w = 0; w < 3; w++) img[(next_row + m) * 8 + w] = 32'(96'(mdl[m]) >> (32 * w));
      next_row += NUM_MODELS;
    end
    check(next_row <= HROWS, "network fits the HBM model");
    // slots the layout leaves empty must read as empty, not as a synapse of
    // an earlier network: the host clears them (through the back door here)
    for (int r = 0; r < next_row && r < HROWS; r++)
      for (int sl = 0; sl < 8; sl++)
        if (!img.exists(r * 8 + sl)) u_hbm.mem[r][sl * SLOT_W +: SLOT_W] = '0;
    // half of the image through the core's write command, half preloaded
    foreach (img[key]) begin
      if (key % 2 == 0 && !all_backdoor) send(CMD_HBM_WRITE, 32'(key), 96'(img[key]));
      else u_hbm.mem[key / 8][(key % 8) * SLOT_W +: SLOT_W] = img[key];
    end
    send(CMD_SET_CFG, CFG_AXON_PTR_BASE, 96'(AXB));
    send(CMD_SET_CFG, CFG_NEUR_PTR_BASE, 96'(NRB));
    send(CMD_SET_CFG, CFG_NEURON_ROWS, 96'((NN + 31) / 32));
    send(CMD_SET_CFG, CFG_AXON_ROWS, 96'((NA + 15) / 16));
    if (models_from_hbm) begin
      send(CMD_LOAD_MODELS, 32'(model_row), '0);
      n_model_loads++;
    end else
      for (int m = 0; m < NUM_MODELS; m++) send(CMD_WRITE_MODEL, 32'(m), 96'(mdl[m]));
  endtask

  // ---------------- reference model ----------------
  longint refv [];
  logic [31:0] nstate [16][2];

  function automatic logic [31:0] xs(logic [31:0] x);
    x = x ^ (x << 13); x = x ^ (x >> 17); x = x ^ (x << 5); return x;
  endfunction

  function automatic longint wrap(longint v);
    return longint'(vmem_t'(v));
  endfunction

  function automatic model_t model_of(int n);
    for (int m = 0; m < NUM_MODELS; m++) if (n < int'(mdl[m].end_neuron)) return mdl[m];
    return mdl[NUM_MODELS-1];
  endfunction

  task automatic reset_ref();
    refv = new[NN];
    foreach (refv[i]) refv[i] = 0;
    for (int l = 0; l < 16; l++)
      for (int h = 0; h < 2; h++) begin
        nstate[l][h] = 32'h9E37_79B9 ^ (32'(l) << 8) ^ (32'(h) << 16) ^ 32'h5bd1;
        if (nstate[l][h] == 0) nstate[l][h] = 1;
      end
  endtask

  // one step of the reference; returns fired neurons
  task automatic ref_step(input bit ax_in [], output bit fired []);
    longint v, nz, raw;
    int rows;
    model_t m;
    fired = new[NN];
    rows = (NN + 31) / 32;
    if (rows == 0) rows = 1;
    for (int r = 0; r < rows; r++)
      for (int h = 0; h < 2; h++)
        for (int l = 0; l < 16; l++) begin
          int n;
          n = 32 * r + 16 * h + l;
          raw = longint'(signed'(17'(nstate[l][h][16:0] | 17'd1)));
          nstate[l][h] = xs(nstate[l][h]);
          if (n >= NN) continue;
          m = model_of(n);
          if (m.nu >= 0) nz = wrap(raw * (longint'(1) << m.nu));
          else if (m.nu <= -17) nz = 0;
          else nz = raw >>> (-m.nu);
          if (nz != 0) n_noisy++;
          v = wrap(refv[n] + nz);
          fired[n] = v > longint'(m.theta);
          if (fired[n]) begin v = 0; n_sweep_spikes++; end
          if (m.is_lif) begin
            if ((v >>> m.lambda) != 0) n_leak++;
            v = wrap(v - (m.lambda >= 63 ? (v < 0 ? -1 : 0) : (v >>> m.lambda)));
          end else begin
            if (v != 0) n_ann_clear++;
            v = 0;
          end
          refv[n] = v;
        end
    for (int a = 0; a < NA; a++) if (ax_in[a]) foreach (ax_syn[a][i]) begin
      refv[ax_syn[a][i].post] = wrap(refv[ax_syn[a][i].post] + ax_syn[a][i].w);
    end
    for (int n = 0; n < NN; n++) if (fired[n]) foreach (nr_syn[n][i])
      refv[nr_syn[n][i].post] = wrap(refv[nr_syn[n][i].post] + nr_syn[n][i].w);
  endtask

  // ---------------- one step on the core, checked ----------------
  int total_cycles, total_reads;
  int o_first;
  bit all_backdoor = 0;
  task automatic run_step(input bit ax_in []);
    bit fired [];
    bit got [];
    host_rsp_t r;
    int nexp;
    for (int a = 0; a < NA; a++) if (ax_in[a]) begin
      send(CMD_SET_AXON, 32'(a), '0);
      n_axon_events++;
    end
    ref_step(ax_in, fired);
    got = new[NN];
    send(CMD_STEP, 0, '0);
    forever begin
      get_rsp(r);
      if (r.kind == RSP_STEP_DONE) break;
      check(r.kind == RSP_SPIKE, "only spike reports during a step");
      if (r.kind == RSP_SPIKE) begin
        check(int'(r.data) < NN && is_out[r.data] && !got[r.data], "spike report names a new output neuron");
        if (int'(r.data) < NN) got[r.data] = 1;
        if (o_first < 0 || int'(r.data) - (NN - 10) < o_first) o_first = int'(r.data) - (NN - 10);
        n_out_spikes++;
      end
    end
    total_cycles += int'(r.data[31:0]);
    total_reads  += int'(r.data[63:32]);
    check(r.data[31:0] > 0, "step reports its cycle count");
    for (int n = 0; n < NN; n++)
      if (is_out[n]) check(got[n] == fired[n], $sformatf("output spike of neuron %0d", n));
    for (int n = 0; n < NN; n++) begin
      if (!(n < 1024 || n % 61 == 0 || n >= NN - 64 || fired[n])) continue;
      send(CMD_READ_MEM, 32'(n), '0);
      get_rsp(r);
      check(r.kind == RSP_DATA && longint'(vmem_t'(r.data[V_W-1:0])) == refv[n]
            && r.data[V_W] == fired[n],
            $sformatf("neuron %0d V=%0d spike=%0d expected V=%0d spike=%0d", n,
                      longint'(vmem_t'(r.data[V_W-1:0])), r.data[V_W], refv[n], fired[n]));
    end
  endtask

  function automatic model_t mk(bit lif, int theta, int nu, int lambda, int end_n);
    model_t m;
    m.is_lif = lif; m.theta = V_W'(theta); m.nu = NU_W'(nu);
    m.lambda = LAMBDA_W'(lambda); m.end_neuron = (NEURON_ID_W+1)'(end_n);
    return m;
  endfunction

  // one MLP: 784 inputs, hidden layers h1 and h2 (h2 = 0: one hidden
  // layer), 10 outputs, binary neurons with threshold 0; nimg images, each
  // presented for one step and followed by one step per layer
  task automatic run_mlp(int h1, int h2, int nimg, bit backdoor);
    bit ax_in [];
    int nw, nl;
    NA = 784; NN = h1 + h2 + 10;
    nl = (h2 == 0) ? 2 : 3;
    ax_syn = new[NA]; nr_syn = new[NN]; is_out = new[NN];
    for (int a = 0; a < NA; a++)
      for (int h = 0; h < h1; h++) begin
        syn_t sy;
        sy.post = h;
        sy.w    = int'($urandom % 32'd121) - 60;
        ax_syn[a].push_back(sy);
      end
    for (int n = 0; n < h1 + h2; n++) begin
      int lo, hi;
      lo = (n < h1) ? h1 : h1 + h2;
      hi = (n < h1 && h2 != 0) ? h1 + h2 : NN;
      for (int t = lo; t < hi; t++) begin
        syn_t sy;
        sy.post = t;
        sy.w    = int'($urandom % 32'd121) - 60;
        nr_syn[n].push_back(sy);
      end
    end
    nw = 0;
    foreach (ax_syn[i]) nw += ax_syn[i].size();
    foreach (nr_syn[i]) nw += nr_syn[i].size();
    for (int n = 0; n < NN; n++) is_out[n] = (n >= h1 + h2);
    mdl[0] = mk(0, 0, -17, 0, h1);           // hidden layer 1
    mdl[1] = mk(0, 0, -17, 0, h1 + h2);      // hidden layer 2 (may be empty)
    mdl[2] = mk(0, 0, -17, 0, NN);           // output layer
    for (int m = 3; m < NUM_MODELS; m++) mdl[m] = mk(0, 1000, -17, 0, 1 << 17);
    reset_ref();
    all_backdoor = backdoor;
    load_network();
    $display("MLP 784-%0d%s-10: %0d neurons, %0d weights, %0d HBM rows", h1,
             h2 == 0 ? "" : $sformatf("-%0d", h2), NN, nw, next_row);
    ax_in = new[NA];
    for (int img_i = 0; img_i < nimg; img_i++) begin
      int c0, r0;
      c0 = total_cycles; r0 = total_reads;
      o_first = -1;
      for (int s = 0; s <= nl; s++) begin
        for (int a = 0; a < NA; a++) ax_in[a] = (s == 0) && (($urandom % 5) == 0);
        run_step(ax_in);
      end
      $display("image %0d: class %0d, %0d cycles, %0d HBM rows read", img_i, o_first,
               total_cycles - c0, total_reads - r0);
    end
  endtask

  // ---------------- tests ----------------
  initial begin : main
    bit ax_in [];
    host_rsp_t r;
    cmd_valid = 0; rsp_ready = 0; cmd = '0;
    repeat (5) @(posedge clk);
    rst = 0;
    wait (!busy);

    // ---- the two MNIST MLPs of the evaluation ----
    run_mlp(128, 0, 4, 0);       // 784 -> 128 -> 10: 101,632 weights
    // clear what is left of the first network before loading the second
    for (int n = 0; n < 138; n++) send(CMD_WRITE_MEM, 32'(n), '0);
    run_mlp(2000, 1000, 2, 1);   // 784 -> 2k -> 1k -> 10: 3,578,000 weights

    // ---- mechanisms ----
    $display("mechanisms: sweep_spikes=%0d axon_events=%0d out_spikes=%0d multi_segment=%0d hbm_stalls=%0d rsp_stalls=%0d ann_clear=%0d",
             n_sweep_spikes, n_axon_events, n_out_spikes, n_multi_seg, n_hbm_stall, n_rsp_stall, n_ann_clear);
    check(n_sweep_spikes > 0, "neurons spiked");
    check(n_axon_events > 0, "input axons used");
    check(n_out_spikes > 0, "output spikes reported");
    check(n_multi_seg > 0, "multi-segment regions");
    check(n_hbm_stall > 0, "HBM stalls");
    check(n_rsp_stall > 0, "response backpressure");
    check(n_ann_clear > 0, "binary neurons cleared");
    $display("total step cycles=%0d HBM row reads=%0d", total_cycles, total_reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
