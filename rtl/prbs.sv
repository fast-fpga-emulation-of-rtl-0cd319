// prbs: PRBS7 transmit data source (x^7 + x^6 + 1, period 127 bits).
//
// One bit per TX clock edge: on every cycle with cke high the 7-bit
// Fibonacci register shifts and tx_data, its newest bit, changes in the next
// cycle. Synchronous reset loads the non-zero SEED. The paper shows a PRBS
// block feeding the TX FFE; the polynomial and seed are this design's choice.
module prbs #(
  parameter logic [6:0] SEED = 7'h7F
) (
  input  logic clk,
  input  logic rst,
  input  logic cke,
  output logic tx_data
);

  logic [6:0] sr;

  always_ff @(posedge clk) begin
    if (rst)      sr <= SEED;
    else if (cke) sr <= {sr[5:0], sr[6] ^ sr[5]};
  end

  assign tx_data = sr[0];

  initial assert (SEED != '0) else $error("prbs: SEED must be non-zero");

endmodule
