// analog_dynamics: the analog dynamics engine (ADE).
//
// The ADE evaluates the response of a linear system (here channel plus RX
// CTLE) to a piecewise-constant input whose steps occur only on TX clock
// edges. With input values x_k held from edge time t_k, the output at time t is
//
//   y(t) = sum_k x_k * (F(t - t_k) - F(t - t_{k-1}))
//
// where F is the step response and t_0 is the most recent edge. The engine
// keeps the times of the last N_TAPS edges (time_hist) and the input values
// that followed them (value_hist). Tap k holds a PWL table of F over the
// window that t - t_k can fall into, for every CTLE setting. Each emulator
// cycle, every tap looks up step[k] = F(emu_time - time_hist[k]); the pulse
// weight of tap k is step[k] - step[k-1]; tap 0 weights the present value, tap
// k the value that held before edge k-1. The products are summed into out.
// The sum is truncated after N_TAPS edges, about 10.6 ns for 85 taps at
// 8 GT/s.
//
// Table depth is set per tap at elaboration: every tap has 2^SEG_BITS
// segments, except taps FINE_TAP_LO..FINE_TAP_HI, which have 2^FINE_SEG_BITS.
// This lets the few taps that cover the steep part of the step response use
// more segments without enlarging the rest.
//
// Timing: cke marks a cycle whose emu_time is a TX edge; the input value
// changes after that cycle. The tables are registered, so out (ctle_out) is
// y(emu_time of the previous cycle), evaluated with the history as it was
// before any edge of that cycle (F(0) = 0 makes the new step contribute
// nothing at its own edge). value is registered once (value_q) and value_hist
// is shifted one cycle after time_hist (cke_d), so the product stage always
// sees the inputs that belong to the looked-up times.
//
// From the paper: the tap array, the per-tap step-response table with setting
// input, time_hist shifted on cke and value_hist shifted on cke_d, the
// pulse = step difference, the two multiplications per tap and the adder
// chain, and sizing the table depth tap by tap. This design's choices: a
// single fine-segment range instead of a free depth for every tap, the
// value_q alignment register, the number formats and reset of the histories
// to zero.
module analog_dynamics
  import hsl_pkg::*;
#(
  parameter int unsigned N_TAPS     = 85,
  parameter int unsigned SETTING_W  = 4,
  parameter int unsigned SEG_BITS   = 5,     // log2 segments per tap ...
  parameter int unsigned FINE_TAP_LO = 1,     // ... except taps FINE_TAP_LO..FINE_TAP_HI,
  parameter int unsigned FINE_TAP_HI = 0,     //     which get FINE_SEG_BITS (empty by default)
  parameter int unsigned FINE_SEG_BITS = 6,
  parameter int unsigned TABLE_BASE = 0     // table_id of tap 0 on the load port
) (
  input  logic                    clk,
  input  logic                    rst,
  input  emu_time_t               emu_time,
  input  logic                    cke,
  input  logic signed [VALUE_W-1:0] value,
  input  logic [SETTING_W-1:0]    setting,
  input  pwl_wr_t                 wr,
  output logic signed [ANA_W-1:0] out
);

  localparam int unsigned PROD_W = STEP_W + 1 + VALUE_W;
  localparam int unsigned ACC_W  = PROD_W + $clog2(N_TAPS + 1);

  emu_time_t                 time_hist  [N_TAPS];
  logic signed [VALUE_W-1:0] value_hist [N_TAPS-1];
  logic signed [VALUE_W-1:0] value_q;
  logic                      cke_d;
  logic signed [STEP_W-1:0]  step [N_TAPS];

  always_ff @(posedge clk) begin
    if (rst) begin
      cke_d   <= 1'b0;
      value_q <= '0;
      for (int k = 0; k < N_TAPS; k++)     time_hist[k]  <= '0;
      for (int k = 0; k < N_TAPS - 1; k++) value_hist[k] <= '0;
    end else begin
      cke_d   <= cke;
      value_q <= value;
      if (cke) begin
        time_hist[0] <= emu_time;
        for (int k = 1; k < N_TAPS; k++) time_hist[k] <= time_hist[k-1];
      end
      if (cke_d) begin
        value_hist[0] <= value_q;
        for (int k = 1; k < N_TAPS - 1; k++) value_hist[k] <= value_hist[k-1];
      end
    end
  end

  for (genvar k = 0; k < N_TAPS; k++) begin : g_tap
    localparam int unsigned SB = (k >= FINE_TAP_LO && k <= FINE_TAP_HI) ? FINE_SEG_BITS : SEG_BITS;
    pwl_table #(
      .IN_W(TIME_W), .N_SETTINGS(1 << SETTING_W), .SETTING_W(SETTING_W),
      .SEG_BITS(SB), .OFFSET_W(STEP_W), .SLOPE_W(STEP_W),
      .SLOPE_FRAC(ADE_SLOPE_FRAC), .OUT_W(STEP_W), .FRAC_W(ADE_FRAC_W), .TABLE_ID(TABLE_BASE + k)
    ) u_table (
      .clk, .in_val(emu_time - time_hist[k]), .setting, .wr, .out(step[k])
    );
  end

  // pulse weights, products and the adder chain
  logic signed [PROD_W-1:0] prod [N_TAPS];
  logic signed [ACC_W-1:0]  acc;

  always_comb begin
    prod[0] = PROD_W'(step[0]) * PROD_W'(value_q);
    for (int k = 1; k < N_TAPS; k++)
      prod[k] = PROD_W'(step[k] - step[k-1]) * PROD_W'(value_hist[k-1]);
    acc = '0;
    for (int k = 0; k < N_TAPS; k++)
      acc += ACC_W'(prod[k]);
  end

  // Q2.16 * Q4.8 -> drop VALUE_FRAC fraction bits -> Q4.16
  assign out = ANA_W'(acc >>> VALUE_FRAC);

endmodule
