// synapse_fetch: second routing phase of a time step.
//
// For each pointer popped from the pointer queue the unit reads the
// pointer's rows of synapse words from HBM (start .. start+rows-1) and
// hands every weight to the lane that owns its postsynaptic neuron. A row
// is half of a 16-slot segment, so slot s of row r belongs to lane
// 8*(r & 1) + s; the paper's alignment rule (a synapse sits in the slot
// of its postsynaptic neuron's pointer) guarantees that the eight synapses
// of one row go to eight different lanes, so a whole row is applied in one
// clock without conflicts. Words of kind SYN_OUTPUT mark the presynaptic
// neuron as an output of the network (the paper's "special flag" in the
// synapse definitions); each such word produces one output spike report,
// one per clock, with backpressure from spk_ready.
//
// Pipeline: up to RB_DEPTH HBM reads are in flight; responses (in order)
// are buffered and decoded from the buffer head. Reads are issued only
// while `go` is high. `idle` is high when no pointer, read or row is left.
module synapse_fetch
  import hs_pkg::*;
#(
  parameter int RB_DEPTH = 4
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     go,
  // pointer queue
  input  logic                     ptr_empty,
  input  pointer_t                 ptr_data,
  output logic                     ptr_pop,
  // HBM read port
  output logic                     hbm_valid,
  output logic [HBM_AW-1:0]        hbm_addr,
  input  logic                     hbm_ready,
  input  logic                     hbm_rsp_valid,
  input  logic [HBM_W-1:0]         hbm_rsp_data,
  // lane updates (one per lane per clock)
  output logic [NUM_LANES-1:0]     upd_valid,
  output logic [K_W-1:0]           upd_k      [NUM_LANES],
  output logic signed [WEIGHT_W-1:0] upd_weight [NUM_LANES],
  // output spike reports
  output logic                     spk_valid,
  output logic [NEURON_ID_W-1:0]   spk_id,
  input  logic                     spk_ready,
  output logic                     idle
);

  localparam int CW = $clog2(RB_DEPTH + 1);

  // ---- issue side ----
  logic [HBM_AW-1:0]     cur_row;
  logic [PTR_ROWS_W-1:0] rows_left;
  logic [CW-1:0]         inflight;
  logic [$clog2(RB_DEPTH):0] rb_count;
  logic                  issue, rsp_in, rb_pop;

  assign ptr_pop   = go && (rows_left == '0) && !ptr_empty;
  assign hbm_valid = go && (rows_left != '0)
                     && ((32'(inflight) + 32'(rb_count)) < RB_DEPTH);
  assign hbm_addr  = cur_row;
  assign issue     = hbm_valid && hbm_ready;
  assign rsp_in    = hbm_rsp_valid && (inflight != '0);

  always_ff @(posedge clk) begin
    if (rst) begin
      rows_left <= '0;
      inflight  <= '0;
    end else begin
      if (ptr_pop) begin
        cur_row   <= ptr_data.start;
        rows_left <= ptr_data.rows;
      end else if (issue) begin
        cur_row   <= cur_row + 1'b1;
        rows_left <= rows_left - 1'b1;
      end
      inflight <= inflight + CW'(issue) - CW'(rsp_in);
    end
  end

  // parity of each issued row, matched in order with its response
  logic par_head, par_empty;
  sync_fifo #(.WIDTH(1), .DEPTH(RB_DEPTH)) u_par (
    .clk, .rst,
    .push (issue), .wdata (cur_row[0]),
    .pop  (rsp_in), .rdata (par_head),
    .empty(par_empty), .full(), .count()
  );

  logic [HBM_W:0] rb_head;
  logic           rb_empty;
  sync_fifo #(.WIDTH(HBM_W + 1), .DEPTH(RB_DEPTH)) u_rows (
    .clk, .rst,
    .push (rsp_in), .wdata ({par_head, hbm_rsp_data}),
    .pop  (rb_pop), .rdata (rb_head),
    .empty(rb_empty), .full(), .count(rb_count)
  );

  // ---- decode side ----
  synapse_t                 slot [SLOTS_PER_ROW];
  logic [SLOTS_PER_ROW-1:0] out_mask;     // SYN_OUTPUT slots of head row
  logic [SLOTS_PER_ROW-1:0] out_done;     // of those, already reported
  logic                     weights_done; // head row's weights applied
  logic [SLOTS_PER_ROW-1:0] out_left;
  logic [$clog2(SLOTS_PER_ROW)-1:0] osel;

  always_comb begin
    for (int s = 0; s < SLOTS_PER_ROW; s++) begin
      slot[s]     = synapse_t'(rb_head[s*SLOT_W +: SLOT_W]);
      out_mask[s] = (slot[s].kind == SYN_OUTPUT);
    end
    out_left = out_mask & ~out_done;
    osel = '0;
    for (int s = SLOTS_PER_ROW - 1; s >= 0; s--)
      if (out_left[s]) osel = ($clog2(SLOTS_PER_ROW))'(s);
  end

  always_comb begin
    for (int l = 0; l < NUM_LANES; l++) begin
      upd_valid[l]  = 1'b0;
      upd_k[l]      = '0;
      upd_weight[l] = '0;
    end
    if (!rb_empty && !weights_done) begin
      for (int s = 0; s < SLOTS_PER_ROW; s++) begin
        upd_valid [SLOTS_PER_ROW*rb_head[HBM_W] + s] = (slot[s].kind == SYN_WEIGHT);
        upd_k     [SLOTS_PER_ROW*rb_head[HBM_W] + s] = slot[s].k;
        upd_weight[SLOTS_PER_ROW*rb_head[HBM_W] + s] = slot[s].weight;
      end
    end
  end

  logic [SLOT_W-1:0] out_word;
  assign out_word  = rb_head[osel*SLOT_W +: SLOT_W];
  assign spk_valid = !rb_empty && (out_left != '0);
  assign spk_id    = out_word[NEURON_ID_W-1:0];
  // the row leaves once its weights are applied and its markers reported
  assign rb_pop    = !rb_empty
                     && ((out_left == '0)
                         || ((out_left & ~(SLOTS_PER_ROW'(1) << osel)) == '0 && spk_ready));

  always_ff @(posedge clk) begin
    if (rst) begin
      weights_done <= 1'b0;
      out_done     <= '0;
    end else if (rb_pop) begin
      weights_done <= 1'b0;
      out_done     <= '0;
    end else if (!rb_empty) begin
      weights_done <= 1'b1;
      if (spk_valid && spk_ready) out_done[osel] <= 1'b1;
    end
  end

  assign idle = (rows_left == '0) && (inflight == '0) && rb_empty;

  a_rsp_expected: assert property (@(posedge clk) disable iff (rst)
                                   hbm_rsp_valid |-> !par_empty);

endmodule
