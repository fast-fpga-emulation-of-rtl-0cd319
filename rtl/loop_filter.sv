// loop_filter: proportional-integral digital loop filter of the CDR.
//
// With e = up - down (-1, 0 or +1) on each update (cke):
//
//   integ    <= integ + ki * e                 (ki in 1/2^ACC_FRAC codes)
//   dco_code  = sat(integ / 2^ACC_FRAC + kp * e)
//
// The integrator is loaded with init on reset, so the DCO starts from the
// code init. dco_code is saturated to 0 .. 2^CODE_W - 1 and registered: it
// changes in the cycle after the update. The paper gives the PI structure,
// its kp, ki and init parameters and the 14-bit code; the scaling and the
// saturation are this design's choice.
module loop_filter #(
  parameter int unsigned CODE_W   = 14,
  parameter int unsigned GAIN_W   = 12,
  parameter int unsigned ACC_FRAC = 4
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              cke,
  input  logic              up,
  input  logic              down,
  input  logic [GAIN_W-1:0] kp,
  input  logic [GAIN_W-1:0] ki,
  input  logic [CODE_W-1:0] init,
  output logic [CODE_W-1:0] dco_code
);

  localparam int unsigned IW = CODE_W + ACC_FRAC + 2;
  localparam logic signed [IW-1:0] IMAX = IW'(((1 << CODE_W) - 1) << ACC_FRAC);

  logic signed [IW-1:0] integ, integ_n;
  logic signed [IW-1:0] code_n;
  logic signed [1:0]    e;

  always_comb begin
    e = (up && !down) ? 2'sd1 : (down && !up) ? -2'sd1 : 2'sd0;
    integ_n = integ + IW'(e) * IW'({1'b0, ki});
    if (integ_n < 0)         integ_n = '0;
    else if (integ_n > IMAX) integ_n = IMAX;
    code_n = (integ_n >>> ACC_FRAC) + IW'(e) * IW'({1'b0, kp});
    if (code_n < 0)                               code_n = '0;
    else if (code_n > IW'((1 << CODE_W) - 1))     code_n = IW'((1 << CODE_W) - 1);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      integ    <= IW'({init, ACC_FRAC'(0)});
      dco_code <= init;
    end else if (cke) begin
      integ    <= integ_n;
      dco_code <= code_n[CODE_W-1:0];
    end
  end

endmodule
