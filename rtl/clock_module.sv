// clock_module: one emulated clock with N_PHASES output phases.
//
// The module stores time_out, the emulated time (fs) of its next edge. In each
// emulator cycle the time manager presents the emulation time on time_in. When
// time_in equals time_out (time_eq) the module asserts the cke_out bit of the
// current phase, rotates its one-hot phase mask, advances its LFSR and moves
// time_out forward by period plus jitter, where jitter = jitter_scale * r and
// r is the LFSR state read as a signed fraction in [-1, 1). The edge spacing
// is therefore uniform in [period - J, period + J) with J = jitter_scale.
//
// Timing: cke_out is combinational from time_in and the registers; time_out
// changes on the clock edge that ends a cycle with time_eq high.
//
// The structure (comparator, adder with scaled LFSR, time_out register, mask
// rotation, per-phase gating by time_eq) follows the paper's clock module
// figure. The time unit, widths, jitter scaling and reset values are choices
// of this design.
module clock_module
  import hsl_pkg::*;
#(
  parameter int unsigned N_PHASES  = 1,
  parameter int unsigned JW        = JIT_W,
  parameter emu_time_t   INIT_TIME = '0,
  parameter logic [15:0] LFSR_SEED = 16'hACE1
) (
  input  logic                clk,
  input  logic                rst,
  input  emu_time_t           time_in,
  input  emu_time_t           period,
  input  logic [JW-1:0]       jitter_scale,
  output emu_time_t           time_out,
  output logic [N_PHASES-1:0] cke_out
);

  logic                time_eq;
  logic [N_PHASES-1:0] mask;
  logic [15:0]         rnd;
  logic signed [JW+16:0] jit_prod;
  logic signed [TIME_W-1:0] jitter;

  assign time_eq = (time_in == time_out);
  assign cke_out = time_eq ? mask : '0;

  lfsr #(.WIDTH(16), .SEED(LFSR_SEED)) u_lfsr (
    .clk (clk), .rst (rst), .cke (time_eq), .out (rnd)
  );

  // r = rnd / 2^15 in [-1, 1); jitter = jitter_scale * r
  assign jit_prod = $signed({1'b0, jitter_scale}) * $signed(rnd);
  assign jitter   = TIME_W'(jit_prod >>> 15);

  always_ff @(posedge clk) begin
    if (rst) begin
      time_out <= INIT_TIME;
      mask     <= N_PHASES'(1);
    end else if (time_eq) begin
      time_out <= time_out + period + emu_time_t'(jitter);
      mask     <= (mask << 1) | (mask >> (N_PHASES - 1));  // rotate
    end
  end

  a_mask_onehot: assert property (@(posedge clk) disable iff (rst) $onehot(mask));

endmodule
