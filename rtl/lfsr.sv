// lfsr: pseudo-random number source of one array column's stochastic rounder.
//
// A 32-bit Galois linear feedback shift register with the maximal-length
// polynomial x^32 + x^22 + x^2 + x + 1 (period 2^32 - 1). When en is high the
// state advances one step per clock; rnd is the low OUT_W bits of the state, a
// new uniformly distributed number each cycle. Reset loads SEED (a zero seed
// is replaced by 1, since the all-zero state is a fixed point).
// The paper asks for an LFSR whose output is as wide as the bits being rounded
// off; the polynomial, state length and seed are this design's choice.
module lfsr #(
  parameter int unsigned OUT_W = 14,
  parameter logic [31:0] SEED  = 32'hACE1_0001
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  output logic [OUT_W-1:0] rnd
);
  localparam logic [31:0] TAPS = 32'h8020_0003;  // x^32 + x^22 + x^2 + x + 1

  logic [31:0] state;

  always_ff @(posedge clk) begin
    if (!rst_n)  state <= (SEED == '0) ? 32'd1 : SEED;
    else if (en) state <= (state >> 1) ^ (state[0] ? TAPS : 32'd0);
  end

  assign rnd = state[OUT_W-1:0];

  initial assert (OUT_W >= 1 && OUT_W <= 32) else $error("lfsr: OUT_W out of range");
endmodule
