// hsl_pkg: types and constants shared by the high-speed link emulator.
//
// Emulated time is an unsigned count of femtoseconds held in TIME_W bits.
// It wraps; every comparison of two times is made on their difference, so
// the design works as long as all times in flight lie within 2^(TIME_W-1) fs
// (about 2.1 us) of each other. Analog quantities are two's-complement fixed
// point: the channel input (TX FFE output) is Q4.8, step-response values are
// Q2.16 and the ADE output (ctle_out) is Q4.16. These formats, the time unit
// and the load-port layout are choices of this design; the emulation method
// does not depend on them.
package hsl_pkg;

  localparam int unsigned TIME_W     = 32;  // fs
  localparam int unsigned VALUE_W    = 12;  // channel input, Q4.8
  localparam int unsigned VALUE_FRAC = 8;
  localparam int unsigned STEP_W     = 18;  // step response, Q2.16
  localparam int unsigned STEP_FRAC  = 16;
  localparam int unsigned ANA_W      = 20;  // ctle_out, Q4.16
  localparam int unsigned ADE_SLOPE_FRAC = 14; // step-response slope: 2^-30 per fs
  localparam int unsigned ADE_FRAC_W     = 16; // widest ADE segment: 2^16 fs
  localparam int unsigned CODE_W     = 14;  // DCO code
  localparam int unsigned JIT_W      = 16;  // peak jitter, fs

  // Maximum number of tables on the shared load port (85 ADE taps + 1 DCO).
  localparam int unsigned TABLE_ID_W = 7;
  localparam int unsigned COEF_W     = 20;  // widest offset/slope stored
  localparam int unsigned WR_SET_W   = 4;
  localparam int unsigned WR_SEG_W   = 8;

  typedef logic [TIME_W-1:0] emu_time_t;

  // Write-port word for the PWL lookup tables. kind selects what is written:
  // a coefficient pair (offset a, slope b) of one segment of one setting, or
  // the table's domain (start tau0 and log2 segment width).
  typedef enum logic [0:0] {WR_COEF = 1'b0, WR_DOMAIN = 1'b1} pwl_wr_kind_e;

  typedef struct packed {
    logic                    en;
    pwl_wr_kind_e            kind;
    logic [TABLE_ID_W-1:0]   table_id;
    logic [WR_SET_W-1:0]     setting;
    logic [WR_SEG_W-1:0]     seg;
    logic signed [COEF_W-1:0] offset;   // a_k        (WR_COEF)
    logic signed [COEF_W-1:0] slope;    // b_k        (WR_COEF)
    logic [TIME_W-1:0]       tau0;     // domain start (WR_DOMAIN)
    logic [4:0]              shift;    // log2 segment width (WR_DOMAIN)
  } pwl_wr_t;

  // Signed "a is earlier than b" on wrapping time.
  function automatic logic time_before(emu_time_t a, emu_time_t b);
    logic [TIME_W-1:0] d;
    d = a - b;
    return d[TIME_W-1];
  endfunction

endpackage
