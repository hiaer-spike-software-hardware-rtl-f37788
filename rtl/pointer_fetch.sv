// pointer_fetch: first routing phase of a time step.
//
// Input is a stream of pointer-row requests: an HBM row address and an
// 8-bit mask of the slots in that row whose axon or neuron spiked. For each
// request the unit reads the row from HBM and pushes the pointer in every
// masked slot, lowest slot first, into the pointer queue, one per clock.
// The paper describes this phase (pointers of all fired neurons and all
// active axons are read into a queue); the request format and the one-row-
// at-a-time pacing are this design's own.
//
// Flow control: a new request is taken only while `go` is high and the
// queue has room for a whole row (`space_ok`), so the unit never has to
// stall in mid-row. HBM reads are single requests (valid/ready) answered in
// order by rsp_valid. `idle` is high when no row is in progress.
module pointer_fetch
  import hs_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     go,
  input  logic                     space_ok,
  // requests
  input  logic                     req_valid,
  input  logic [HBM_AW-1:0]        req_row,
  input  logic [SLOTS_PER_ROW-1:0] req_mask,
  output logic                     req_ready,
  // HBM read port
  output logic                     hbm_valid,
  output logic [HBM_AW-1:0]        hbm_addr,
  input  logic                     hbm_ready,
  input  logic                     hbm_rsp_valid,
  input  logic [HBM_W-1:0]         hbm_rsp_data,
  // pointer queue
  output logic                     ptr_push,
  output pointer_t                 ptr_data,
  output logic                     idle
);

  typedef enum logic [1:0] {PF_IDLE, PF_READ, PF_WAIT, PF_UNPACK} pf_state_e;
  pf_state_e state;

  logic [HBM_AW-1:0]        row_q;
  logic [SLOTS_PER_ROW-1:0] mask_q;
  logic [HBM_W-1:0]         data_q;
  logic [$clog2(SLOTS_PER_ROW)-1:0] sel;

  // lowest set bit of the remaining mask
  always_comb begin
    sel = '0;
    for (int i = SLOTS_PER_ROW - 1; i >= 0; i--)
      if (mask_q[i]) sel = ($clog2(SLOTS_PER_ROW))'(i);
  end

  assign req_ready = (state == PF_IDLE) && go && space_ok;
  assign hbm_valid = (state == PF_READ);
  assign hbm_addr  = row_q;
  assign ptr_push  = (state == PF_UNPACK) && (mask_q != '0);
  assign ptr_data  = pointer_t'(data_q[sel*SLOT_W +: SLOT_W]);
  assign idle      = (state == PF_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= PF_IDLE;
    end else begin
      unique case (state)
        PF_IDLE:   if (req_valid && req_ready) begin
                     row_q  <= req_row;
                     mask_q <= req_mask;
                     state  <= (req_mask == '0) ? PF_IDLE : PF_READ;
                   end
        PF_READ:   if (hbm_ready) state <= PF_WAIT;
        PF_WAIT:   if (hbm_rsp_valid) begin
                     data_q <= hbm_rsp_data;
                     state  <= PF_UNPACK;
                   end
        PF_UNPACK: begin
                     if (mask_q == '0) state <= PF_IDLE;
                     else mask_q[sel] <= 1'b0;
                   end
        default:   state <= PF_IDLE;
      endcase
    end
  end

endmodule
