// rx_dfe: two-tap decision feedback equalizer and its summing node.
//
// The DFE removes the first two post-cursors of intersymbol interference
// from the CTLE output before it reaches both samplers:
//
//   eq_out = ctle_out - w1 * d[n-1] - w2 * d[n-2],  d = +/-1 (1 -> +1)
//
// d[n-1] is the latest data decision (rx_data, the data sampler's register).
// d[n-2] is held here: on each data-sampling cycle (cke) the current rx_data
// is copied into it, at the same edge at which the sampler takes its next
// decision. eq_out is combinational. w1 and w2 are in the units of ctle_out
// (Q4.16, sign-extended from COEF_W bits). The paper gives the tap count and
// the position of the DFE in the loop; the weight ports, formats and sign
// convention are this design's choice.
module rx_dfe #(
  parameter int unsigned W      = 20,
  parameter int unsigned COEF_W = 16
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     cke,
  input  logic                     rx_data,
  input  logic signed [COEF_W-1:0] w1,
  input  logic signed [COEF_W-1:0] w2,
  input  logic signed [W-1:0]      ctle_out,
  output logic signed [W-1:0]      eq_out
);

  logic d2;

  always_ff @(posedge clk) begin
    if (rst)      d2 <= 1'b0;
    else if (cke) d2 <= rx_data;
  end

  logic signed [W+1:0] fb;

  always_comb begin
    fb     = (rx_data ? (W+2)'(w1) : -(W+2)'(w1)) + (d2 ? (W+2)'(w2) : -(W+2)'(w2));
    eq_out = W'((W+2)'(ctle_out) - fb);
  end

endmodule
