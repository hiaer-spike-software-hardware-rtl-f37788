// hbm_model: behavioural stand-in for one HBM pseudo-channel (not
// synthesizable). Rows of 256 bits; requests are accepted on valid/ready,
// with `ready` dropped pseudo-randomly when STALL is non-zero; reads are
// answered in order LATENCY clocks after acceptance. Writes honour the
// per-slot strobe. Test benches preload rows through `mem` or via the
// core's HBM write commands; `reads` counts accepted read requests.
module hbm_model
  import hs_pkg::*;
#(
  parameter int ROWS    = 4096,
  parameter int LATENCY = 8,
  parameter int STALL   = 0     // percent of cycles with ready low
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             req_valid,
  input  hbm_req_t         req,
  output logic             req_ready,
  output logic             rsp_valid,
  output logic [HBM_W-1:0] rsp_data
);

  logic [HBM_W-1:0] mem [ROWS];
  int unsigned      reads;
  longint unsigned  cycle;

  typedef struct {
    longint unsigned  due;
    logic [HBM_W-1:0] data;
  } pending_t;
  pending_t q [$];

  initial begin
    for (int i = 0; i < ROWS; i++) mem[i] = '0;
    reads = 0;
  end

  always_ff @(posedge clk) begin
    if (rst) req_ready <= 1'b1;
    else     req_ready <= (STALL == 0) ? 1'b1 : (($urandom % 100) >= STALL);
  end

  always @(posedge clk) begin
    if (rst) begin
      cycle     <= 0;
      rsp_valid <= 1'b0;
      q.delete();
    end else begin
      cycle <= cycle + 1;
      if (req_valid && req_ready) begin
        assert (req.addr < ROWS) else $error("hbm_model: row %0d out of range", req.addr);
        if (req.we) begin
          for (int s = 0; s < SLOTS_PER_ROW; s++)
            if (req.wstrb[s]) mem[req.addr][s*SLOT_W +: SLOT_W] <= req.wdata[s*SLOT_W +: SLOT_W];
        end else begin
          pending_t p;
          p.due  = cycle + LATENCY;
          p.data = mem[req.addr];
          q.push_back(p);
          reads++;
        end
      end
      if (q.size() > 0 && q[0].due <= cycle) begin
        rsp_valid <= 1'b1;
        rsp_data  <= q[0].data;
        void'(q.pop_front());
      end else begin
        rsp_valid <= 1'b0;
      end
    end
  end

endmodule
