// hiaer_core: one spiking-neural-network core with its HBM port.
//
// The core runs a network stored as adjacency lists: every axon (external
// input) and every neuron has a pointer in HBM to a contiguous region of
// synapse words. A time step (CMD_STEP) runs in three parts, in the order
// the paper gives:
//   1. Sweep. All neurons are updated, 32 per clock (16 lanes x 2 neurons
//      per URAM row): noise, threshold, reset, leak. Each URAM row with at
//      least one spike is queued as {row, 32-bit spike mask}.
//   2. Pointer phase. The active input axons (BRAM rows, cleared as they
//      are read) and then the queued neuron spikes become pointer-row
//      requests; pointer_fetch reads the pointers from HBM into the
//      pointer queue.
//   3. Synapse phase. synapse_fetch reads the synapse rows of every queued
//      pointer and adds the weights to the membrane potentials in the
//      lanes; output-marker words become RSP_SPIKE responses.
// Phases 2 and 3 alternate whenever the pointer queue is nearly full, so a
// step with more spikes than the queue holds still completes. The step
// ends with RSP_STEP_DONE carrying the clock cycles spent and the number
// of HBM row reads, the two figures the paper's hardware reports.
//
// Host side: a command stream (valid/ready, host_cmd_t) and a response
// stream (valid/ready, host_rsp_t) stand in for the PCIe interface. Commands
// write and read HBM slots, set input axons, load neuron models and the
// configuration registers, read and write membrane potentials and start a
// step. Commands are taken only between steps. The neuron model table is
// kept in HBM, as in the paper: CMD_LOAD_MODELS reads 16 rows from a given
// HBM row (model m in the low 66 bits of row base+m, up to 16 reads in
// flight) into the model registers; CMD_WRITE_MODEL writes one model
// directly.
//
// After reset the core clears every membrane potential (2 x DEPTH clocks,
// all lanes at once) and the axon event memory before it takes commands.
//
// HBM side: one request port (valid/ready, hbm_req_t; writes carry a
// per-slot strobe) and an in-order read response (valid, no backpressure).
//
// The paper gives the memories and their sizes, the 16-way parallelism,
// the pointer/synapse organisation, the neuron equations and the two
// routing phases. The command set, the encodings and the way the phases
// hand over are this design's own.
module hiaer_core
  import hs_pkg::*;
#(
  parameter int DEPTH     = URAM_DEPTH,  // URAM rows per lane
  parameter int AXON_DEPTH = AXON_ROWS, // BRAM rows
  parameter int PQ_DEPTH  = 512,         // pointer queue entries
  parameter int RB_DEPTH  = 4,           // synapse rows in flight
  localparam int RW       = $clog2(DEPTH),
  localparam int AXW      = $clog2(AXON_DEPTH)
) (
  input  logic       clk,
  input  logic       rst,
  // host command / response streams
  input  logic       cmd_valid,
  input  host_cmd_t  cmd,
  output logic       cmd_ready,
  output logic       rsp_valid,
  output host_rsp_t  rsp,
  input  logic       rsp_ready,
  // HBM
  output logic       hbm_req_valid,
  output hbm_req_t   hbm_req,
  input  logic       hbm_req_ready,
  input  logic       hbm_rsp_valid,
  input  logic [HBM_W-1:0] hbm_rsp_data,
  // status
  output logic       busy
);

  localparam logic [1:0] LANE_SWEEP = 2'd0;
  localparam logic [1:0] LANE_ADD   = 2'd1;
  localparam logic [1:0] LANE_WRITE = 2'd2;
  localparam logic [1:0] LANE_READ  = 2'd3;

  typedef enum logic [3:0] {
    S_INIT, S_IDLE, S_HBM_WR, S_HBM_RD, S_MEM_RD, S_RSP,
    S_SWEEP, S_SWEEP_TAIL, S_PH1, S_PH2, S_DONE, S_MODEL_LD
  } state_e;

  typedef enum logic [2:0] {
    ES_IDLE, ES_AX_RD, ES_AX_WAIT, ES_AX_EMIT, ES_NF, ES_NF_EMIT, ES_DONE
  } src_state_e;

  state_e     state;
  src_state_e es;

  // ---- configuration ----
  model_t            models [NUM_MODELS];
  logic [HBM_AW-1:0] axon_ptr_base, neur_ptr_base;
  logic [RW:0]       neuron_rows;
  logic [AXW:0]      axon_rows;

  // ---- model table load from HBM ----
  localparam int MW = $clog2(NUM_MODELS);
  logic [MW:0] mld_iss, mld_rcv;   // rows requested / received

  // ---- host command bookkeeping ----
  host_cmd_t   cmd_q;
  logic [63:0] rsp_data_q;
  logic [31:0] cyc_cnt, hbm_rd_cnt;

  // ---- sweep ----
  logic [RW:0]   sw_row;       // next row to issue
  logic [RW-1:0] sw_row_d;     // row whose result arrives this cycle

  // ---- lanes ----
  logic [NUM_LANES-1:0]       ln_valid;
  logic [1:0]                 ln_op;
  logic [RW:0]                ln_k      [NUM_LANES];
  logic signed [WEIGHT_W-1:0] ln_weight [NUM_LANES];
  logic [NEUR_W-1:0]          ln_data;
  logic [NUM_LANES-1:0]       ln_sw_valid, ln_rd_valid;
  logic [1:0]                 ln_sw_spike [NUM_LANES];
  logic [NEUR_W-1:0]          ln_rd_data  [NUM_LANES];

  // ---- synapse fetch ----
  logic [NUM_LANES-1:0]       sf_upd_valid;
  logic [K_W-1:0]             sf_upd_k      [NUM_LANES];
  logic signed [WEIGHT_W-1:0] sf_upd_weight [NUM_LANES];

  logic [3:0] mem_lane_q;
  logic [RW+1:0] init_k;   // reset: neuron half-rows cleared so far

  for (genvar l = 0; l < NUM_LANES; l++) begin : g_lane
    neuron_lane #(.LANE(l), .DEPTH(DEPTH)) u_lane (
      .clk, .rst,
      .models      (models),
      .op_valid    (ln_valid[l]),
      .op          (ln_op),
      .op_k        (ln_k[l]),
      .op_weight   (ln_weight[l]),
      .op_data     (ln_data),
      .sweep_valid (ln_sw_valid[l]),
      .sweep_spike (ln_sw_spike[l]),
      .rd_valid    (ln_rd_valid[l]),
      .rd_data     (ln_rd_data[l])
    );
  end

  always_comb begin
    ln_op   = LANE_SWEEP;
    ln_data = cmd_q.data[NEUR_W-1:0];
    for (int l = 0; l < NUM_LANES; l++) begin
      ln_valid[l]  = 1'b0;
      ln_k[l]      = {sw_row[RW-1:0], 1'b0};
      ln_weight[l] = '0;
    end
    unique case (state)
      S_SWEEP: begin
        ln_valid = '1;
      end
      S_PH2: begin
        ln_op = LANE_ADD;
        for (int l = 0; l < NUM_LANES; l++) begin
          ln_valid[l]  = sf_upd_valid[l];
          ln_k[l]      = sf_upd_k[l][RW:0];
          ln_weight[l] = sf_upd_weight[l];
        end
      end
      S_IDLE: begin
        ln_data = cmd.data[NEUR_W-1:0];
        if (cmd_valid && (cmd.op == CMD_READ_MEM || cmd.op == CMD_WRITE_MEM)) begin
          ln_op = (cmd.op == CMD_READ_MEM) ? LANE_READ : LANE_WRITE;
          ln_valid[cmd.idx[3:0]] = 1'b1;
          for (int l = 0; l < NUM_LANES; l++) ln_k[l] = cmd.idx[4 +: RW+1];
        end
      end
      S_INIT: begin
        ln_op    = LANE_WRITE;
        ln_data  = '0;
        ln_valid = '1;
        for (int l = 0; l < NUM_LANES; l++) ln_k[l] = init_k[RW:0];
      end
      default: ;
    endcase
  end

  // ---- fired-row queue: {row, spike mask} from the sweep ----
  localparam int FW = RW + 2 * NUM_LANES;
  logic [2*NUM_LANES-1:0] sw_mask;
  logic                   nf_push, nf_pop, nf_empty;
  logic [FW-1:0]          nf_head;

  always_comb begin
    for (int l = 0; l < NUM_LANES; l++) begin
      sw_mask[l]             = ln_sw_spike[l][0];
      sw_mask[NUM_LANES + l] = ln_sw_spike[l][1];
    end
  end
  assign nf_push = ln_sw_valid[0] && (sw_mask != '0);

  sync_fifo #(.WIDTH(FW), .DEPTH(DEPTH)) u_fired (
    .clk, .rst,
    .push (nf_push), .wdata ({sw_row_d, sw_mask}),
    .pop  (nf_pop),  .rdata (nf_head),
    .empty(nf_empty), .full(), .count()
  );

  // ---- axon events ----
  logic                 ax_busy, ax_set, ax_rd;
  logic [AXW-1:0]       ax_b;
  logic [AXON_W-1:0]    ax_rdata;
  logic [AXW:0]         es_b;

  assign ax_set = (state == S_IDLE) && cmd_valid && cmd.op == CMD_SET_AXON;
  assign ax_rd  = (es == ES_AX_RD) && (es_b != axon_rows);
  assign ax_b   = es_b[AXW-1:0];

  axon_event_mem #(.ROWS(AXON_DEPTH), .WIDTH(AXON_W)) u_axons (
    .clk, .rst,
    .busy     (ax_busy),
    .set_en   (ax_set),
    .set_axon (cmd.idx[AXW+4-1:0]),
    .rd_en    (ax_rd),
    .rd_addr  (ax_b),
    .rd_clr   (1'b1),
    .rd_data  (ax_rdata)
  );

  // ---- event source: pointer-row requests ----
  logic [AXON_W-1:0]      es_axbits;
  logic [RW-1:0]          es_nrow;
  logic [2*NUM_LANES-1:0] es_nmask;
  logic [1:0]             es_q;
  logic                   pf_req_valid, pf_req_ready;
  logic [HBM_AW-1:0]      pf_req_row;
  logic [SLOTS_PER_ROW-1:0] pf_req_mask;
  logic                   src_done;

  always_comb begin
    pf_req_valid = 1'b0;
    pf_req_row   = '0;
    pf_req_mask  = '0;
    if (es == ES_AX_EMIT) begin
      pf_req_mask  = es_axbits[es_q[0]*SLOTS_PER_ROW +: SLOTS_PER_ROW];
      pf_req_row   = axon_ptr_base + HBM_AW'({ax_b, es_q[0]});
      pf_req_valid = (pf_req_mask != '0);
    end else if (es == ES_NF_EMIT) begin
      pf_req_mask  = es_nmask[es_q*SLOTS_PER_ROW +: SLOTS_PER_ROW];
      pf_req_row   = neur_ptr_base + HBM_AW'({es_nrow, es_q});
      pf_req_valid = (pf_req_mask != '0);
    end
  end

  assign nf_pop   = (es == ES_NF) && !nf_empty;
  assign src_done = (es == ES_DONE);

  logic es_adv;   // current request taken or empty
  assign es_adv = !pf_req_valid || pf_req_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      es <= ES_IDLE;
    end else if (state == S_IDLE && cmd_valid && cmd.op == CMD_STEP) begin
      es   <= ES_AX_RD;
      es_b <= '0;
    end else begin
      unique case (es)
        ES_AX_RD:   es <= (es_b == axon_rows) ? ES_NF : ES_AX_WAIT;
        ES_AX_WAIT: begin
                      es_axbits <= ax_rdata;
                      es_q      <= '0;
                      if (ax_rdata == '0) begin
                        es_b <= es_b + 1'b1;
                        es   <= ES_AX_RD;
                      end else es <= ES_AX_EMIT;
                    end
        ES_AX_EMIT: if (es_adv) begin
                      if (es_q == 2'd1) begin
                        es_b <= es_b + 1'b1;
                        es   <= ES_AX_RD;
                      end else es_q <= es_q + 1'b1;
                    end
        ES_NF:      if (nf_empty) begin
                      if (state == S_PH1 || state == S_PH2) es <= ES_DONE;
                    end else begin
                      es_nrow  <= nf_head[2*NUM_LANES +: RW];
                      es_nmask <= nf_head[2*NUM_LANES-1:0];
                      es_q     <= '0;
                      es       <= ES_NF_EMIT;
                    end
        ES_NF_EMIT: if (es_adv) begin
                      es_q <= es_q + 1'b1;
                      if (es_q == 2'd3) es <= ES_NF;
                    end
        default:    ;
      endcase
    end
  end

  // ---- pointer queue and the two fetch units ----
  pointer_t pq_head, pf_ptr;
  logic     pf_push, pq_empty, pq_pop, pq_space;
  logic [$clog2(PQ_DEPTH):0] pq_count;

  sync_fifo #(.WIDTH($bits(pointer_t)), .DEPTH(PQ_DEPTH)) u_pq (
    .clk, .rst,
    .push (pf_push), .wdata (pf_ptr),
    .pop  (pq_pop),  .rdata (pq_head),
    .empty(pq_empty), .full(), .count(pq_count)
  );
  assign pq_space = (32'(pq_count) + SLOTS_PER_ROW) <= PQ_DEPTH;

  logic              pf_hbm_valid, sf_hbm_valid, pf_idle, sf_idle;
  logic [HBM_AW-1:0] pf_hbm_addr, sf_hbm_addr;
  logic              sf_spk_valid;
  logic [NEURON_ID_W-1:0] sf_spk_id;

  pointer_fetch u_pf (
    .clk, .rst,
    .go            (state == S_PH1),
    .space_ok      (pq_space),
    .req_valid     (pf_req_valid),
    .req_row       (pf_req_row),
    .req_mask      (pf_req_mask),
    .req_ready     (pf_req_ready),
    .hbm_valid     (pf_hbm_valid),
    .hbm_addr      (pf_hbm_addr),
    .hbm_ready     (hbm_req_ready && state == S_PH1),
    .hbm_rsp_valid (hbm_rsp_valid && state == S_PH1),
    .hbm_rsp_data  (hbm_rsp_data),
    .ptr_push      (pf_push),
    .ptr_data      (pf_ptr),
    .idle          (pf_idle)
  );

  synapse_fetch #(.RB_DEPTH(RB_DEPTH)) u_sf (
    .clk, .rst,
    .go            (state == S_PH2),
    .ptr_empty     (pq_empty),
    .ptr_data      (pq_head),
    .ptr_pop       (pq_pop),
    .hbm_valid     (sf_hbm_valid),
    .hbm_addr      (sf_hbm_addr),
    .hbm_ready     (hbm_req_ready && state == S_PH2),
    .hbm_rsp_valid (hbm_rsp_valid && state == S_PH2),
    .hbm_rsp_data  (hbm_rsp_data),
    .upd_valid     (sf_upd_valid),
    .upd_k         (sf_upd_k),
    .upd_weight    (sf_upd_weight),
    .spk_valid     (sf_spk_valid),
    .spk_id        (sf_spk_id),
    .spk_ready     (rsp_ready && state == S_PH2),
    .idle          (sf_idle)
  );

  // ---- HBM request mux ----
  always_comb begin
    hbm_req_valid = 1'b0;
    hbm_req       = '0;
    unique case (state)
      S_PH1: begin
        hbm_req_valid = pf_hbm_valid;
        hbm_req.addr  = pf_hbm_addr;
      end
      S_PH2: begin
        hbm_req_valid = sf_hbm_valid;
        hbm_req.addr  = sf_hbm_addr;
      end
      S_HBM_WR, S_HBM_RD: begin
        hbm_req_valid = (state == S_HBM_WR) || !cmd_q.data[95];
        hbm_req.we    = (state == S_HBM_WR);
        hbm_req.addr  = cmd_q.idx[3 +: HBM_AW];
        hbm_req.wdata = {SLOTS_PER_ROW{cmd_q.data[SLOT_W-1:0]}};
        hbm_req.wstrb = SLOTS_PER_ROW'(1) << cmd_q.idx[2:0];
      end
      S_MODEL_LD: begin
        hbm_req_valid = !mld_iss[MW];
        hbm_req.addr  = cmd_q.idx[HBM_AW-1:0] + HBM_AW'(mld_iss);
      end
      default: ;
    endcase
  end

  // ---- responses ----
  always_comb begin
    rsp_valid = 1'b0;
    rsp       = '0;
    if (state == S_PH2) begin
      rsp_valid = sf_spk_valid;
      rsp.kind  = RSP_SPIKE;
      rsp.data  = 64'(sf_spk_id);
    end else if (state == S_RSP) begin
      rsp_valid = 1'b1;
      rsp.kind  = RSP_DATA;
      rsp.data  = rsp_data_q;
    end else if (state == S_DONE) begin
      rsp_valid = 1'b1;
      rsp.kind  = RSP_STEP_DONE;
      rsp.data  = {hbm_rd_cnt, cyc_cnt};
    end
  end

  assign cmd_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);

  // ---- main sequencer ----
  logic ph1_stop, ph2_stop;
  assign ph1_stop = pf_idle && !(pf_req_valid && pf_req_ready) && (src_done || !pq_space);
  assign ph2_stop = sf_idle && pq_empty;

  always_ff @(posedge clk) begin
    if (rst) begin
      state         <= S_INIT;
      init_k        <= '0;
      axon_ptr_base <= '0;
      neur_ptr_base <= '0;
      neuron_rows   <= '0;
      axon_rows     <= '0;
      cyc_cnt       <= '0;
      hbm_rd_cnt    <= '0;
      for (int m = 0; m < NUM_MODELS; m++) models[m] <= '0;
    end else begin
      if (state != S_IDLE && state != S_DONE && state != S_INIT) begin
        cyc_cnt <= cyc_cnt + 1'b1;
        if ((state == S_PH1 || state == S_PH2) && hbm_req_valid && hbm_req_ready)
          hbm_rd_cnt <= hbm_rd_cnt + 1'b1;
      end
      unique case (state)
        S_INIT: begin
          if (!init_k[RW+1]) init_k <= init_k + 1'b1;
          else if (!ax_busy) state <= S_IDLE;
        end
        S_IDLE: if (cmd_valid) begin
          cmd_q <= cmd;
          unique case (cmd.op)
            CMD_HBM_WRITE:   state <= S_HBM_WR;
            CMD_HBM_READ:    begin
                               cmd_q.data[95] <= 1'b0;   // read not yet issued
                               state <= S_HBM_RD;
                             end
            CMD_WRITE_MODEL: models[cmd.idx[$clog2(NUM_MODELS)-1:0]]
                               <= model_t'(cmd.data[$bits(model_t)-1:0]);
            CMD_SET_CFG:     unique case (cmd.idx[1:0])
                               2'(CFG_AXON_PTR_BASE): axon_ptr_base <= cmd.data[HBM_AW-1:0];
                               2'(CFG_NEUR_PTR_BASE): neur_ptr_base <= cmd.data[HBM_AW-1:0];
                               2'(CFG_NEURON_ROWS):   neuron_rows   <= cmd.data[RW:0];
                               default:               axon_rows     <= cmd.data[AXW:0];
                             endcase
            CMD_STEP:        begin
                               sw_row     <= '0;
                               cyc_cnt    <= '0;
                               hbm_rd_cnt <= '0;
                               state      <= S_SWEEP;
                             end
            CMD_READ_MEM:    begin
                               mem_lane_q <= cmd.idx[3:0];
                               state      <= S_MEM_RD;
                             end
            CMD_LOAD_MODELS: begin
                               mld_iss <= '0;
                               mld_rcv <= '0;
                               state   <= S_MODEL_LD;
                             end
            default:         ;   // CMD_SET_AXON, CMD_WRITE_MEM: done in one clock
          endcase
        end
        S_HBM_WR: if (hbm_req_ready) state <= S_IDLE;
        S_HBM_RD: begin
          if (hbm_req_valid && hbm_req_ready) cmd_q.data[95] <= 1'b1;
          if (hbm_rsp_valid) begin
            rsp_data_q <= 64'(hbm_rsp_data[cmd_q.idx[2:0]*SLOT_W +: SLOT_W]);
            state      <= S_RSP;
          end
        end
        S_MEM_RD: begin
          rsp_data_q <= 64'(ln_rd_data[mem_lane_q]);
          state      <= S_RSP;
        end
        S_RSP:  if (rsp_ready) state <= S_IDLE;
        S_MODEL_LD: begin
          if (hbm_req_valid && hbm_req_ready) mld_iss <= mld_iss + 1'b1;
          if (hbm_rsp_valid) begin
            models[mld_rcv[MW-1:0]] <= model_t'(hbm_rsp_data[$bits(model_t)-1:0]);
            mld_rcv <= mld_rcv + 1'b1;
            if (mld_rcv == (MW+1)'(NUM_MODELS - 1)) state <= S_IDLE;
          end
        end
        S_SWEEP: begin
          if (neuron_rows == '0 || sw_row == neuron_rows - 1'b1) state <= S_SWEEP_TAIL;
          sw_row <= sw_row + 1'b1;
        end
        S_SWEEP_TAIL: state <= S_PH1;
        S_PH1:  if (ph1_stop) state <= S_PH2;
        S_PH2:  if (ph2_stop) state <= (src_done && pf_idle) ? S_DONE : S_PH1;
        S_DONE: if (rsp_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) sw_row_d <= sw_row[RW-1:0];

  a_hbm_rsp_only_when_reading: assert property (@(posedge clk) disable iff (rst)
      hbm_rsp_valid |-> (state inside {S_PH1, S_PH2, S_HBM_RD, S_MODEL_LD}));

endmodule
