// hiaer_core_cnn_tb: two convolutional networks of the evaluation on the
// core at its default sizes (no parameter overrides). First the smallest
// spiking CNN, the DVS gesture network C(1) -> 3FC; then the stride-2
// LeNet-5 with binary neurons (784 pixels -> 5x5/2 conv to 6 x 12x12 ->
// 5x5/2 conv to 16 x 4x4 -> 120 -> 84 -> 10: 1,334 neurons, 44,190
// distinct weights, 101,640 stored synapses), each image presented for one
// step and followed by five steps without input. The DVS network in detail: Input: 2 x 63 x 63 event channels = 7,938 axons.
// Layer 1 is a 5x5, stride-2 convolution to one 30x30 channel (900 LIF
// neurons, 50 shared weights), then fully connected layers of 120, 84
// and 11 LIF neurons: 1,115 neurons and 50 + 108,000 + 10,080 + 924 =
// 119,054 distinct weights, the sizes of the published network. The
// convolution is unrolled into 45,000 synapses (each of the 900 neurons
// receives 50), so the core stores 164,004 synapses in HBM.
//
// The trained weights and the DVS recordings are not available: the
// weights are random and each sample is 6 steps of random events (about
// 4% of the axons per step). What is checked is the core: every output
// spike and every membrane after every step is compared with the bench's
// reference model. The LIF neurons use threshold 40 and leak lambda = 2.
// Per sample or image the bench prints the spike count of each output
// neuron and the cycles and HBM rows the core reported. The host model,
// the HBM layout compiler and the reference model are those of
// hiaer_core_tb.
module hiaer_core_cnn_tb;
  import hs_pkg::*;

  localparam int HROWS    = 65536;

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
  int out_cnt [11];
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
        if (int'(r.data) >= NN - 11 && int'(r.data) < NN) out_cnt[int'(r.data) - (NN - 11)]++;
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

  // the DVS gesture network C(1) -> 120 -> 84 -> 11 with LIF neurons
  task automatic run_cnn(int nsamp);
    bit ax_in [];
    int kw [2][5][5];
    int nconv, f1, f2, nw;
    NA = 2 * 63 * 63; nconv = 30 * 30; f1 = nconv; f2 = f1 + 120;
    NN = nconv + 120 + 84 + 11;
    ax_syn = new[NA]; nr_syn = new[NN]; is_out = new[NN];
    foreach (kw[c, y, x]) kw[c][y][x] = int'($urandom % 32'd91) - 30;
    // axon (c, y, x) -> conv neuron (oy, ox) when y = 2*oy + ky, x = 2*ox + kx
    for (int oy = 0; oy < 30; oy++)
      for (int ox = 0; ox < 30; ox++)
        for (int c = 0; c < 2; c++)
          for (int ky = 0; ky < 5; ky++)
            for (int kx = 0; kx < 5; kx++) begin
              syn_t sy;
              sy.post = 30 * oy + ox;
              sy.w    = kw[c][ky][kx];
              ax_syn[c * 3969 + 63 * (2 * oy + ky) + 2 * ox + kx].push_back(sy);
            end
    for (int n = 0; n < f2 + 84; n++) begin
      int lo, hi;
      lo = (n < f1) ? f1 : (n < f2) ? f2 : f2 + 84;
      hi = (n < f1) ? f2 : (n < f2) ? f2 + 84 : NN;
      for (int t = lo; t < hi; t++) begin
        syn_t sy;
        sy.post = t;
        sy.w    = int'($urandom % 32'd61) - 28;
        nr_syn[n].push_back(sy);
      end
    end
    nw = 0;
    foreach (ax_syn[i]) nw += ax_syn[i].size();
    foreach (nr_syn[i]) nw += nr_syn[i].size();
    check(nw == 164004, "unrolled synapse count");
    for (int n = 0; n < NN; n++) is_out[n] = (n >= f2 + 84);
    mdl[0] = mk(1, 40, -17, 2, f1);
    mdl[1] = mk(1, 40, -17, 2, f2);
    mdl[2] = mk(1, 40, -17, 2, f2 + 84);
    mdl[3] = mk(1, 40, -17, 2, NN);
    for (int m = 4; m < NUM_MODELS; m++) mdl[m] = mk(0, 1000, -17, 0, 1 << 17);
    reset_ref();
    all_backdoor = 0;
    load_network();
    $display("CNN C(1)-120-84-11: %0d axons, %0d neurons, %0d synapses, %0d HBM rows", NA, NN, nw, next_row);
    ax_in = new[NA];
    for (int smp = 0; smp < nsamp; smp++) begin
      int c0, r0;
      string cnt;
      c0 = total_cycles; r0 = total_reads;
      foreach (out_cnt[i]) out_cnt[i] = 0;
      for (int s = 0; s < 6; s++) begin
        for (int a = 0; a < NA; a++) ax_in[a] = ($urandom % 25) == 0;
        run_step(ax_in);
      end
      cnt = "";
      foreach (out_cnt[i]) cnt = {cnt, $sformatf(" %0d", out_cnt[i])};
      $display("sample %0d: output spikes%s, %0d cycles, %0d HBM rows read", smp, cnt,
               total_cycles - c0, total_reads - r0);
    end
  endtask

  // convolution from a C_in x H x H block of sources (axons when ax = 1,
  // else neurons from src) to C_out x O x O neurons from dst, kernel K,
  // stride S, no padding, one shared kernel per (C_out, C_in) pair
  task automatic add_conv(bit ax, int src, int cin, int h, int dst, int cout, int k, int st);
    int o;
    int kw [];
    o = (h - k) / st + 1;
    kw = new[cout * cin * k * k];
    foreach (kw[i]) kw[i] = int'($urandom % 32'd81) - 36;
    for (int co = 0; co < cout; co++)
      for (int oy = 0; oy < o; oy++)
        for (int ox = 0; ox < o; ox++)
          for (int ci = 0; ci < cin; ci++)
            for (int ky = 0; ky < k; ky++)
              for (int kx = 0; kx < k; kx++) begin
                syn_t sy;
                int from;
                sy.post = dst + (co * o + oy) * o + ox;
                sy.w    = kw[((co * cin + ci) * k + ky) * k + kx];
                from    = src + (ci * h + st * oy + ky) * h + st * ox + kx;
                if (ax) ax_syn[from].push_back(sy); else nr_syn[from].push_back(sy);
              end
  endtask

  task automatic add_fc(int src, int n_in, int dst, int n_out);
    for (int i = 0; i < n_in; i++)
      for (int j = 0; j < n_out; j++) begin
        syn_t sy;
        sy.post = dst + j;
        sy.w    = int'($urandom % 32'd61) - 28;
        nr_syn[src + i].push_back(sy);
      end
  endtask

  // LeNet-5 with stride-2 convolutions, binary neurons:
  // 784 -> C(6) 12x12 -> C(16) 4x4 -> 120 -> 84 -> 10
  task automatic run_lenet(int nimg);
    bit ax_in [];
    int nw;
    NA = 784; NN = 864 + 256 + 120 + 84 + 10;
    ax_syn = new[NA]; nr_syn = new[NN]; is_out = new[NN];
    add_conv(1, 0, 1, 28, 0, 6, 5, 2);
    add_conv(0, 0, 6, 12, 864, 16, 5, 2);
    add_fc(864, 256, 1120, 120);
    add_fc(1120, 120, 1240, 84);
    add_fc(1240, 84, 1324, 10);
    nw = 0;
    foreach (ax_syn[i]) nw += ax_syn[i].size();
    foreach (nr_syn[i]) nw += nr_syn[i].size();
    check(nw == 101640, "LeNet-5 unrolled synapse count");
    for (int n = 0; n < NN; n++) is_out[n] = (n >= 1324);
    mdl[0] = mk(0, 0, -17, 0, 864);
    mdl[1] = mk(0, 0, -17, 0, 1120);
    mdl[2] = mk(0, 0, -17, 0, 1324);
    mdl[3] = mk(0, 0, -17, 0, NN);
    for (int m = 4; m < NUM_MODELS; m++) mdl[m] = mk(0, 1000, -17, 0, 1 << 17);
    reset_ref();
    load_network();
    $display("LeNet-5 stride 2: %0d axons, %0d neurons, %0d synapses, %0d HBM rows", NA, NN, nw, next_row);
    ax_in = new[NA];
    for (int im = 0; im < nimg; im++) begin
      int c0, r0;
      string cnt;
      c0 = total_cycles; r0 = total_reads;
      foreach (out_cnt[i]) out_cnt[i] = 0;
      // one step of input, then one step per layer
      for (int s = 0; s < 6; s++) begin
        for (int a = 0; a < NA; a++) ax_in[a] = (s == 0) && (($urandom % 5) == 0);
        run_step(ax_in);
      end
      cnt = "";
      for (int i = 0; i < 10; i++) cnt = {cnt, $sformatf(" %0d", out_cnt[i])};
      $display("image %0d: output spikes%s, %0d cycles, %0d HBM rows read", im, cnt,
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

    run_cnn(3);
    // clear what is left of the first network before loading the second
    for (int n = 0; n < 1115; n++) send(CMD_WRITE_MEM, 32'(n), '0);
    run_lenet(3);

    // ---- mechanisms ----
    $display("mechanisms: sweep_spikes=%0d axon_events=%0d phase_switches=%0d out_spikes=%0d multi_segment=%0d hbm_stalls=%0d rsp_stalls=%0d leak=%0d",
             n_sweep_spikes, n_axon_events, n_phase_switch, n_out_spikes, n_multi_seg, n_hbm_stall, n_rsp_stall, n_leak);
    check(n_sweep_spikes > 0, "neurons spiked");
    check(n_axon_events > 0, "input axons used");
    check(n_out_spikes > 0, "output spikes reported");
    check(n_multi_seg > 0, "multi-segment regions");
    check(n_hbm_stall > 0, "HBM stalls");
    check(n_rsp_stall > 0, "response backpressure");
    check(n_leak > 0, "leak applied");
    check(n_phase_switch > 0, "pointer queue filled: phases alternated");
    $display("total step cycles=%0d HBM row reads=%0d", total_cycles, total_reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (10_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
