// lfsr: Galois linear feedback shift register used as the jitter source of a
// clock module.
//
// The paper's clock module adds "the scaled output of an LFSR" to its period;
// it does not give the polynomial. This one is maximal length for the default
// width of 16 (x^16 + x^14 + x^13 + x^11 + 1, period 2^16 - 1), steps once on
// every cycle with cke high, and loads the non-zero SEED on a synchronous
// reset. The state is the output, valid in the cycle after the step.
module lfsr #(
  parameter int unsigned        WIDTH = 16,
  parameter logic [WIDTH-1:0]   POLY  = 16'hB400,   // taps 16,14,13,11 (right-shift form)
  parameter logic [WIDTH-1:0]   SEED  = 16'hACE1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             cke,
  output logic [WIDTH-1:0] out
);

  logic [WIDTH-1:0] state;

  always_ff @(posedge clk) begin
    if (rst)
      state <= SEED;
    else if (cke)
      state <= (state >> 1) ^ (state[0] ? POLY : '0);
  end

  assign out = state;

  initial assert (SEED != '0) else $error("lfsr: SEED must be non-zero");

endmodule
