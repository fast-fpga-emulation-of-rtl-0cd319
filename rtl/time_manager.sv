// time_manager: decides the emulated time of every emulator cycle and which
// emulated clocks have an edge in it.
//
// It holds two clock modules: the TX clock with one phase (its rising edge)
// and the RX clock with two phases (rising edge rx_cke_p for the data sampler,
// falling edge rx_cke_n for the edge sampler). Each stores the time of its
// next edge; the emulation time of the cycle, emu_time, is the earlier of the
// two. Every clock whose next edge equals emu_time fires in that cycle, so
// each emulator cycle carries at least one edge and no cycle is spent on
// analog-only time steps. With an 8 GT/s TX clock and an RX clock near the
// same rate, a unit interval takes three emulator cycles (one TX, two RX
// edges), or two when a TX and an RX edge coincide.
//
// rx_period comes from the DCO table and may change every cycle; each RX edge
// advances by half of it, so one RX period spans both phases. Jitter of each
// clock is set by its jitter_scale (peak, fs, per edge).
//
// Timing: emu_time and the cke outputs are combinational from the clock
// modules' registers and are valid for the whole cycle.
//
// Follows the paper: the minimum over next-edge times, the two clocks and
// their phase counts. This design's choices: clock enables replace the gated
// clocks that the board generates with a clock-management primitive, and the
// RX clock starts a third of a TX period after the TX clock.
module time_manager
  import hsl_pkg::*;
#(
  parameter emu_time_t   TX_PERIOD  = 125_000,   // fs, 8 GT/s
  parameter emu_time_t   RX_INIT    = 41_000,    // fs, first RX edge
  parameter int unsigned JW         = JIT_W
) (
  input  logic          clk,
  input  logic          rst,
  input  emu_time_t     rx_period,
  input  logic [JW-1:0] tx_jitter_scale,
  input  logic [JW-1:0] rx_jitter_scale,
  output emu_time_t     emu_time,
  output logic          tx_cke,
  output logic          rx_cke_p,
  output logic          rx_cke_n
);

  emu_time_t  tx_next, rx_next;
  logic [0:0] tx_ph;
  logic [1:0] rx_ph;

  // minimum of the next-edge times (wrap-safe)
  assign emu_time = time_before(rx_next, tx_next) ? rx_next : tx_next;

  clock_module #(.N_PHASES(1), .JW(JW), .INIT_TIME('0), .LFSR_SEED(16'hACE1)) u_tx_clk (
    .clk, .rst, .time_in(emu_time), .period(TX_PERIOD),
    .jitter_scale(tx_jitter_scale), .time_out(tx_next), .cke_out(tx_ph)
  );

  clock_module #(.N_PHASES(2), .JW(JW), .INIT_TIME(RX_INIT), .LFSR_SEED(16'h5EED)) u_rx_clk (
    .clk, .rst, .time_in(emu_time), .period(rx_period >> 1),
    .jitter_scale(rx_jitter_scale), .time_out(rx_next), .cke_out(rx_ph)
  );

  assign tx_cke   = tx_ph[0];
  assign rx_cke_p = rx_ph[0];
  assign rx_cke_n = rx_ph[1];

  a_edge_every_cycle: assert property (@(posedge clk) disable iff (rst)
    tx_cke || rx_cke_p || rx_cke_n)
    else $error("time_manager: cycle without a clock edge");

endmodule
