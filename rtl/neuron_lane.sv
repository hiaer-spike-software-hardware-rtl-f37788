// neuron_lane: one of the sixteen parallel neuron lanes of a core.
//
// A lane owns every neuron n with n % 16 == LANE: its URAM bank row n >> 5
// holds neuron n in half (n >> 4) & 1, as {spike, V}. The paper gives the
// 16-way parallelism and the URAM bank per lane; the operation set and the
// pipeline are this design's own.
//
// Operations (one per clock, op_k = n >> 4 selects row and half):
//   LANE_SWEEP  time-step update of both neurons of row op_k >> 1: noise,
//               threshold, reset, leak (neuron_unit); the new spike bits
//               are stored and reported on sweep_valid/sweep_spike.
//   LANE_ADD    V += op_weight for one neuron (a synaptic event).
//   LANE_WRITE  overwrite one neuron's {spike, V} with op_data.
//   LANE_READ   return one neuron's {spike, V} on rd_valid/rd_data.
// Every operation is a read-modify-write: the bank is read in the issue
// cycle, the new row is computed and written the next cycle. The bank's
// write-first bypass makes back-to-back operations on one row see each
// other's results, so a stream of LANE_ADD ops needs no stall.
// Results (sweep_*, rd_*) appear one clock after the operation is issued.
// A neuron's model is the first entry of `models` whose end_neuron lies
// above its number; when none does, the last entry applies.
module neuron_lane
  import hs_pkg::*;
#(
  parameter int LANE  = 0,
  parameter int DEPTH = URAM_DEPTH,
  localparam int RW   = $clog2(DEPTH)
) (
  input  logic                        clk,
  input  logic                        rst,
  input  model_t                      models [NUM_MODELS],
  input  logic                        op_valid,
  input  logic [1:0]                  op,
  input  logic [RW:0]                 op_k,
  input  logic signed [WEIGHT_W-1:0]  op_weight,
  input  logic [NEUR_W-1:0]           op_data,
  output logic                        sweep_valid,
  output logic [1:0]                  sweep_spike,
  output logic                        rd_valid,
  output logic [NEUR_W-1:0]           rd_data
);

  localparam logic [1:0] LANE_SWEEP = 2'd0;
  localparam logic [1:0] LANE_ADD   = 2'd1;
  localparam logic [1:0] LANE_WRITE = 2'd2;
  localparam logic [1:0] LANE_READ  = 2'd3;

  // ---- stage 0: issue the bank read ----
  logic                       s1_valid;
  logic [1:0]                 s1_op;
  logic [RW:0]                s1_k;
  logic signed [WEIGHT_W-1:0] s1_weight;
  logic [NEUR_W-1:0]          s1_data;

  always_ff @(posedge clk) begin
    if (rst) s1_valid <= 1'b0;
    else     s1_valid <= op_valid;
    s1_op     <= op;
    s1_k      <= op_k;
    s1_weight <= op_weight;
    s1_data   <= op_data;
  end

  logic [URAM_W-1:0] row_old, row_new;
  logic              wr_en;

  membrane_bank #(.DEPTH(DEPTH), .WIDTH(URAM_W)) u_bank (
    .clk     (clk),
    .rd_en   (op_valid),
    .rd_addr (op_k[RW:1]),
    .rd_data (row_old),
    .wr_en   (wr_en),
    .wr_addr (s1_k[RW:1]),
    .wr_data (row_new)
  );

  // ---- stage 1: compute and write back ----
  model_t model_h [2];
  vmem_t  noise_h [2];
  vmem_t  v_next  [2];
  logic   spk_next[2];

  function automatic model_t lookup(input logic [NEURON_ID_W:0] n,
                                    input model_t tbl [NUM_MODELS]);
    model_t m;
    m = tbl[NUM_MODELS-1];
    for (int i = NUM_MODELS - 1; i >= 0; i--)
      if (n < tbl[i].end_neuron) m = tbl[i];
    return m;
  endfunction

  for (genvar h = 0; h < 2; h++) begin : g_half
    logic [NEURON_ID_W:0] nid;
    assign nid        = (NEURON_ID_W+1)'({s1_k[RW:1], 1'(h), 4'(LANE)});
    assign model_h[h] = lookup(nid, models);

    noise_gen #(.SEED(32'h9E37_79B9 ^ (32'(LANE) << 8) ^ (32'(h) << 16) ^ 32'h5bd1)) u_noise (
      .clk   (clk),
      .rst   (rst),
      .en    (s1_valid && s1_op == LANE_SWEEP),
      .nu    (model_h[h].nu),
      .noise (noise_h[h])
    );

    neuron_unit u_unit (
      .v_in   (vmem_t'(row_old[h*NEUR_W +: V_W])),
      .noise  (noise_h[h]),
      .model  (model_h[h]),
      .v_out  (v_next[h]),
      .spike  (spk_next[h])
    );
  end

  logic [NEUR_W-1:0] old_half;
  vmem_t             v_add;

  always_comb begin
    old_half = s1_k[0] ? row_old[NEUR_W +: NEUR_W] : row_old[0 +: NEUR_W];
    v_add    = vmem_t'(old_half[V_W-1:0]) + vmem_t'(s1_weight);
    row_new  = row_old;
    wr_en    = 1'b0;
    if (s1_valid) begin
      unique case (s1_op)
        LANE_SWEEP: begin
          row_new = {spk_next[1], v_next[1], spk_next[0], v_next[0]};
          wr_en   = 1'b1;
        end
        LANE_ADD: begin
          row_new[s1_k[0]*NEUR_W +: NEUR_W] = {old_half[NEUR_W-1], v_add};
          wr_en   = 1'b1;
        end
        LANE_WRITE: begin
          row_new[s1_k[0]*NEUR_W +: NEUR_W] = s1_data;
          wr_en   = 1'b1;
        end
        default: wr_en = 1'b0;
      endcase
    end
  end

  assign sweep_valid = s1_valid && s1_op == LANE_SWEEP;
  assign sweep_spike = {spk_next[1], spk_next[0]};
  assign rd_valid    = s1_valid && s1_op == LANE_READ;
  assign rd_data     = old_half;

endmodule
