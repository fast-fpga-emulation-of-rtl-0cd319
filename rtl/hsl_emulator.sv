// hsl_emulator: emulator of an 8 GT/s serial link transceiver.
//
// Digital blocks of the link (PRBS source, 3-tap TX FFE, 2-tap RX DFE,
// samplers, bang-bang phase detector, PI loop filter) run on one free-running
// emulator clock, enabled by the clock edges the time manager schedules. The
// analog path - channel plus adjustable RX CTLE - is the analog dynamics
// engine, which computes ctle_out exactly at each RX sampling time as a sum of
// pulse responses of the past TX symbols. The DCO's code-to-period curve is a
// small PWL table whose output closes the CDR loop into the time manager.
//
// One emulator cycle covers one or more emulated clock edges that share an
// emulation time; a unit interval takes about three cycles (TX edge, RX data
// edge, RX edge-sample edge).
//
// Pipeline (cycle c has emu_time t and edge flags):
//   c   : TX edge -> PRBS/FFE update (channel_in valid from c+1);
//         ADE looks up step responses at time t
//   c+1 : ctle_out = y(t); DFE sums; sampler takes samp_p / samp_n if c had
//         the matching RX edge (rx_p_en / rx_n_en)
//   c+2 : BBPD compares d[n-1], e, d[n]; loop filter updates (bb_en)
//   c+3 : dco_code valid; c+4: rx_period valid at the time manager
//
// Tables: ADE taps are table_id 0 .. N_TAPS-1 on the wr port, the DCO table is
// table_id N_TAPS. They hold no contents after power-up: load them (while rst
// is high or later) before relying on the outputs.
//
// The ADE tables have 32 segments per tap, except taps 31 and 32, which have
// 64. For the testbenches' step response (4 ns flight delay), with domains
// trimmed to a 1.5 ps jitter bound, those are the only taps that need more
// than 32 segments to stay within 0.1 % of full scale. Another channel would
// set FINE_TAP_LO/HI/FINE_SEG_BITS differently.
//
// Settings in the paper that a user adjusts in real time are ports:
// tx_ffe_setting, ctle_setting, tx/rx_jitter_scale, kp, ki, init. The DFE
// weights are ports too. The gated emulated clocks of the board are replaced
// by the clock enables tx_cke, rx_cke_p, rx_cke_n, which are also outputs so
// an external clock-gating primitive could produce real clocks from them.
module hsl_emulator
  import hsl_pkg::*;
#(
  parameter int unsigned N_TAPS    = 85,
  parameter int unsigned SEG_BITS  = 5,       // ADE: 32 segments per tap ...
  parameter int unsigned FINE_TAP_LO = 31,     // ... and 64 for taps 31..32, where the
  parameter int unsigned FINE_TAP_HI = 32,     // step response rises (sized for the
  parameter int unsigned FINE_SEG_BITS = 6,    // channel of the testbenches)
  parameter emu_time_t   TX_PERIOD = 125_000
) (
  input  logic                     clk,
  input  logic                     rst,
  // table load port
  input  pwl_wr_t                  wr,
  // user settings
  input  logic [3:0]               tx_ffe_setting,
  input  logic [3:0]               ctle_setting,
  input  logic [JIT_W-1:0]         tx_jitter_scale,
  input  logic [JIT_W-1:0]         rx_jitter_scale,
  input  logic [11:0]              kp,
  input  logic [11:0]              ki,
  input  logic [CODE_W-1:0]        init,
  input  logic signed [15:0]       dfe_w1,
  input  logic signed [15:0]       dfe_w2,
  // observation
  output emu_time_t                emu_time,
  output logic                     tx_cke,
  output logic                     rx_cke_p,
  output logic                     rx_cke_n,
  output logic                     tx_data,
  output logic signed [VALUE_W-1:0] channel_in,
  output logic signed [ANA_W-1:0]  ctle_out,
  output logic signed [ANA_W-1:0]  eq_out,
  output logic                     samp_p,
  output logic                     samp_n,
  output logic                     rx_data,
  output logic                     up,
  output logic                     down,
  output logic [CODE_W-1:0]        dco_code,
  output emu_time_t                rx_period
);

  // ---- time manager ----------------------------------------------------------
  time_manager #(.TX_PERIOD(TX_PERIOD)) u_tm (
    .clk, .rst, .rx_period, .tx_jitter_scale, .rx_jitter_scale,
    .emu_time, .tx_cke, .rx_cke_p, .rx_cke_n
  );

  // ---- transmitter -----------------------------------------------------------
  prbs u_prbs (.clk, .rst, .cke(tx_cke), .tx_data);

  tx_ffe u_ffe (
    .clk, .rst, .cke(tx_cke), .tx_data, .setting(tx_ffe_setting), .channel_in
  );

  // ---- channel + CTLE ----------------------------------------------------------
  analog_dynamics #(.N_TAPS(N_TAPS), .SETTING_W(4), .SEG_BITS(SEG_BITS),
                    .FINE_TAP_LO(FINE_TAP_LO), .FINE_TAP_HI(FINE_TAP_HI), .FINE_SEG_BITS(FINE_SEG_BITS),
                    .TABLE_BASE(0)) u_ade (
    .clk, .rst, .emu_time, .cke(tx_cke), .value(channel_in),
    .setting(ctle_setting), .wr, .out(ctle_out)
  );

  // ---- receiver ----------------------------------------------------------------
  // RX edges delayed by the ADE latency, then once more for the phase detector
  logic rx_p_en, rx_n_en, bb_en;

  always_ff @(posedge clk) begin
    if (rst) {rx_p_en, rx_n_en, bb_en} <= '0;
    else     {rx_p_en, rx_n_en, bb_en} <= {rx_cke_p, rx_cke_n, rx_p_en};
  end

  rx_dfe #(.W(ANA_W), .COEF_W(16)) u_dfe (
    .clk, .rst, .cke(rx_p_en), .rx_data, .w1(dfe_w1), .w2(dfe_w2), .ctle_out, .eq_out
  );

  sampler #(.W(ANA_W)) u_samp_p (.clk, .rst, .cke(rx_p_en), .in_val(eq_out), .samp(samp_p));
  sampler #(.W(ANA_W)) u_samp_n (.clk, .rst, .cke(rx_n_en), .in_val(eq_out), .samp(samp_n));

  bbpd u_bbpd (.clk, .rst, .cke(bb_en), .samp_p, .samp_n, .rx_data, .up, .down);

  loop_filter #(.CODE_W(CODE_W), .GAIN_W(12), .ACC_FRAC(4)) u_lf (
    .clk, .rst, .cke(bb_en), .up, .down, .kp, .ki, .init, .dco_code
  );

  // ---- DCO transfer function: code -> RX period (fs), 4 x (20 + 20) bits -----
  logic signed [19:0] dco_period;

  pwl_table #(
    .IN_W(CODE_W), .N_SETTINGS(1), .SETTING_W(1), .SEG_BITS(2),
    .OFFSET_W(20), .SLOPE_W(20), .SLOPE_FRAC(10), .OUT_W(20), .FRAC_W(12),
    .TABLE_ID(N_TAPS)
  ) u_dco (
    .clk, .in_val(dco_code), .setting(1'b0), .wr, .out(dco_period)
  );

  assign rx_period = emu_time_t'(unsigned'(dco_period));

endmodule
