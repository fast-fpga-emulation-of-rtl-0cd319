// sampler: RX slicer.
//
// On a cycle with cke high (an RX clock phase edge, delayed to line up with
// the analog dynamics engine's output) it registers the decision
// samp = (in_val >= 0). The output holds until the next sampling edge. The
// paper draws the two RX samplers as comparators clocked by rx_clk_p and
// rx_clk_n; the zero threshold is this design's choice.
module sampler #(
  parameter int unsigned W = 20
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                cke,
  input  logic signed [W-1:0] in_val,
  output logic                samp
);

  always_ff @(posedge clk) begin
    if (rst)      samp <= 1'b0;
    else if (cke) samp <= !in_val[W-1];
  end

endmodule
