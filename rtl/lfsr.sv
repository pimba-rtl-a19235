// lfsr: Galois linear feedback shift register, the random source of the
// stochastic rounding unit.
//
// The paper only states that stochastic rounding uses an LFSR; the width,
// polynomial (x^32 + x^22 + x^2 + x + 1, maximal length) and seed are this
// design's choice. The register steps once per cycle in which en is high and
// reloads SEED on reset; state is the current value, registered.
module lfsr #(
  parameter int           W    = 32,
  parameter logic [W-1:0] TAPS = W'(32'h8020_0003),
  parameter logic [W-1:0] SEED = W'(32'hACE1_2468)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  output logic [W-1:0] state
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      state <= SEED;
    else if (en)     state <= state[0] ? ((state >> 1) ^ TAPS) : (state >> 1);
  end

  initial assert (SEED != '0) else $error("lfsr: SEED must be nonzero");

endmodule
