// axon_event_mem: BRAM of input axon events (8K rows x 16 bits).
//
// Bit a%16 of row a/16 is set when input axon a is to spike in the next
// time step. The host sets single bits (set_en/set_axon) between steps;
// the step sequencer reads whole rows and clears each row it has read
// (rd_clr), so every step starts with only the newly set inputs. Read data
// appears the clock after rd_en. A set and a clear of the same row in one
// cycle cannot happen: the two sides are used in different phases. Reset
// clears the whole array, one row per cycle, and holds `busy` meanwhile.
// Sizes are the paper's; the set/clear interface is this design's own.
module axon_event_mem #(
  parameter int ROWS  = 8192,
  parameter int WIDTH = 16,
  localparam int AW   = $clog2(ROWS),
  localparam int BW   = $clog2(WIDTH)
) (
  input  logic             clk,
  input  logic             rst,
  output logic             busy,
  input  logic             set_en,
  input  logic [AW+BW-1:0] set_axon,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  input  logic             rd_clr,
  output logic [WIDTH-1:0] rd_data
);

  logic [WIDTH-1:0] mem [ROWS];
  logic [AW:0]      clr_ptr;

  // set is a read-modify-write: capture the row, write it back next cycle
  logic             set_q;
  logic [AW-1:0]    set_row_q;
  logic [BW-1:0]    set_bit_q;
  logic [WIDTH-1:0] set_old;

  assign busy = !clr_ptr[AW];

  always_ff @(posedge clk) begin
    if (rst) begin
      clr_ptr <= '0;
      set_q   <= 1'b0;
    end else begin
      if (busy) clr_ptr <= clr_ptr + 1'b1;
      set_q <= set_en;
    end
  end

  always_ff @(posedge clk) begin
    set_row_q <= set_axon[AW+BW-1:BW];
    set_bit_q <= set_axon[BW-1:0];
    set_old   <= (set_q && set_row_q == set_axon[AW+BW-1:BW])
                 ? (set_old | (WIDTH'(1) << set_bit_q))
                 : mem[set_axon[AW+BW-1:BW]];
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (busy)                mem[clr_ptr[AW-1:0]] <= '0;
    else if (set_q)          mem[set_row_q] <= set_old | (WIDTH'(1) << set_bit_q);
    else if (rd_en && rd_clr) mem[rd_addr] <= '0;
  end

endmodule
