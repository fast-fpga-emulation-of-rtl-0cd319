// bbpd: Alexander (bang-bang) phase detector.
//
// Each update (cke, one cycle after a data sample was taken) compares the
// previous data bit d[n-1], the edge sample e taken between the two data
// samples (samp_n) and the new data bit d[n] (samp_p):
//
//   up   = (d[n-1] != e) && (e == d[n])   edge sample after the transition:
//                                         clock late, raise DCO frequency
//   down = (d[n-1] == e) && (e != d[n])   edge sample before the transition:
//                                         clock early, lower DCO frequency
//
// Without a transition both are 0. up and down are combinational and valid in
// the update cycle; d[n-1] is registered at its end. rx_data is the recovered
// data bit (samp_p). The paper names a bang-bang phase detector driving up and
// down; the Alexander logic and the sense of up are this design's reading
// (a larger DCO code is a higher frequency).
module bbpd (
  input  logic clk,
  input  logic rst,
  input  logic cke,
  input  logic samp_p,
  input  logic samp_n,
  output logic rx_data,
  output logic up,
  output logic down
);

  logic d_prev;

  always_ff @(posedge clk) begin
    if (rst)      d_prev <= 1'b0;
    else if (cke) d_prev <= samp_p;
  end

  assign rx_data = samp_p;
  assign up      = cke && (d_prev != samp_n) && (samp_n == samp_p);
  assign down    = cke && (d_prev == samp_n) && (samp_n != samp_p);

endmodule
