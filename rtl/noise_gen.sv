// noise_gen: membrane noise source for one neuron update unit.
//
// Each update draws a 17-bit signed value, forces its least significant bit
// to one (so the values are odd and balanced around zero) and scales it by
// the model's signed shift nu: left by nu when nu > 0, arithmetic right by
// -nu when nu < 0. The noise formula and the LSB rule are the paper's. The
// random source is this design's choice: a 32-bit xorshift generator
// (x ^= x<<13; x ^= x>>17; x ^= x<<5) whose low 17 bits are used. A value of
// nu at or below -17 gives exactly zero, so such a neuron is deterministic,
// as the paper's neuron-model table states.
//
// Timing: `noise` is combinational from the current state and `nu`; the
// state advances on every clock with `en` high. Reset loads SEED.
module noise_gen
  import hs_pkg::*;
#(
  parameter logic [31:0] SEED = 32'h1234_5679
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    en,
  input  logic signed [NU_W-1:0]  nu,
  output vmem_t                   noise
);

  logic [31:0] state;

  function automatic logic [31:0] xorshift32(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  always_ff @(posedge clk) begin
    if (rst)     state <= (SEED == 32'd0) ? 32'd1 : SEED;
    else if (en) state <= xorshift32(state);
  end

  logic signed [NOISE_W-1:0] raw;
  vmem_t                     ext;
  logic [NU_W-1:0]           mag;

  always_comb begin
    raw    = signed'(state[NOISE_W-1:0] | {{(NOISE_W-1){1'b0}}, 1'b1});
    ext    = vmem_t'(raw);
    mag    = nu[NU_W-1] ? NU_W'(-nu) : NU_W'(nu);
    if (!nu[NU_W-1])            noise = ext << mag;
    else if (mag >= NU_W'(NOISE_W)) noise = '0;
    else                        noise = ext >>> mag;
  end

endmodule
