// membrane_bank: one URAM bank of a lane (4K rows x 72 bits).
//
// Each row holds two neurons as {spike, V}. The paper stores neuron events
// and membrane potentials in 16 such banks; their port arrangement is this
// design's choice: one synchronous read port and one write port. A read
// returns data the clock after rd_en. When the same row is written in the
// cycle it is read, the read returns the new data (write-first), which
// lets a read-modify-write pipeline issue back-to-back updates of one row.
// Contents are cleared row by row only by writes; reset does not touch the
// array (as with a real URAM).
module membrane_bank #(
  parameter int DEPTH = 4096,
  parameter int WIDTH = 72
) (
  input  logic                     clk,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [WIDTH-1:0]         rd_data,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [WIDTH-1:0]         wr_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= (wr_en && wr_addr == rd_addr) ? wr_data : mem[rd_addr];
  end

endmodule
