// pwl_table: piecewise-linear function lookup with a trimmed domain.
//
// The table stores N_SETTINGS functions, each as NSEG = 2^SEG_BITS line
// segments. Segment k of setting s starts at tau_k = tau0 + k * 2^shift and
// holds an offset a[s][k] (the function value at tau_k) and a slope b[s][k]
// (per input unit, scaled by 2^SLOPE_FRAC). For an argument x:
//
//   d = x - tau0,  k = d >> shift,  f = d - (k << shift)
//   out = a[s][k] + (b[s][k] * f) >>> SLOPE_FRAC
//
// Arguments before tau0 return a[s][0]; arguments past the last segment
// return the end point of the last segment. The result is saturated to OUT_W
// bits and registered: out is valid one cycle after in_val and setting.
//
// In the analog dynamics engine each tap's table holds the step responses for
// all CTLE settings over the time window that tap can see (domain trimming:
// tau0 and shift differ per tap). The same module, with one setting and four
// segments, is the DCO code-to-period table.
//
// Loading: coefficient pairs and the domain (tau0, shift) are written through
// the wr port when wr.table_id equals TABLE_ID. Writes are accepted during
// reset; reset does not clear the table, so it can be loaded while the rest of
// the emulator is held in reset. shift must not exceed FRAC_W.
//
// From the paper: offsets and slopes per time point, one table per ADE tap
// with a per-tap trimmed domain, a setting input, a clocked output. This
// design's choices: equal-width power-of-two segments, clamping outside the
// domain, the fixed-point formats and the run-time load port.
module pwl_table
  import hsl_pkg::*;
#(
  parameter int unsigned IN_W       = TIME_W,
  parameter int unsigned N_SETTINGS = 16,
  parameter int unsigned SETTING_W  = 4,
  parameter int unsigned SEG_BITS   = 5,
  parameter int unsigned OFFSET_W   = STEP_W,
  parameter int unsigned SLOPE_W    = STEP_W,
  parameter int unsigned SLOPE_FRAC = 16,
  parameter int unsigned OUT_W      = STEP_W,
  parameter int unsigned FRAC_W     = 16,
  parameter int unsigned TABLE_ID   = 0
) (
  input  logic                    clk,
  input  logic [IN_W-1:0]         in_val,
  input  logic [SETTING_W-1:0]    setting,
  input  pwl_wr_t                 wr,
  output logic signed [OUT_W-1:0] out
);

  localparam int unsigned NSEG   = 1 << SEG_BITS;
  localparam int unsigned DEPTH  = N_SETTINGS * NSEG;
  localparam int unsigned ADDR_W = $clog2(DEPTH);
  localparam int unsigned PROD_W = SLOPE_W + FRAC_W + 2;

  typedef struct packed {
    logic signed [OFFSET_W-1:0] a;
    logic signed [SLOPE_W-1:0]  b;
  } coef_t;

  coef_t             mem [DEPTH];
  logic [IN_W-1:0]   tau0;
  logic [4:0]        shift;

  // ---- load port -------------------------------------------------------
  logic          wr_hit;
  logic [ADDR_W-1:0] wr_addr;
  assign wr_hit  = wr.en && (wr.table_id == TABLE_ID_W'(TABLE_ID));
  assign wr_addr = ADDR_W'((N_SETTINGS == 1 ? 0 : int'(wr.setting)) * NSEG
                           + int'(wr.seg[SEG_BITS-1:0]));

  always_ff @(posedge clk) begin
    if (wr_hit && wr.kind == WR_COEF)
      mem[wr_addr] <= '{a: wr.offset[OFFSET_W-1:0], b: wr.slope[SLOPE_W-1:0]};
    if (wr_hit && wr.kind == WR_DOMAIN) begin
      tau0  <= wr.tau0[IN_W-1:0];
      shift <= wr.shift;
    end
  end

  // ---- segment selection -----------------------------------------------
  logic [IN_W:0]        d;         // one extra bit: sign of in_val - tau0
  logic [IN_W:0]        q;
  logic [SEG_BITS-1:0]  seg;
  logic [FRAC_W:0]      frac;       // 0 .. 2^shift
  logic [ADDR_W-1:0]    rd_addr;
  coef_t                c;

  always_comb begin
    d = {1'b0, in_val} - {1'b0, tau0};
    q = d >> shift;
    if (d[IN_W]) begin                         // before the domain
      seg  = '0;
      frac = '0;
    end else if (q >= (IN_W+1)'(NSEG)) begin   // past the domain
      seg  = SEG_BITS'(NSEG - 1);
      frac = (FRAC_W+1)'(1) << shift;
    end else begin
      seg  = q[SEG_BITS-1:0];
      frac = (FRAC_W+1)'(d & (((IN_W+1)'(1) << shift) - (IN_W+1)'(1)));
    end
    rd_addr = ADDR_W'((N_SETTINGS == 1 ? 0 : int'(setting)) * NSEG + int'(seg));
    c       = mem[rd_addr];
  end

  // ---- evaluation ----------------------------------------------------------
  localparam logic signed [OUT_W-1:0] OUT_MAX = {1'b0, {(OUT_W-1){1'b1}}};
  localparam logic signed [OUT_W-1:0] OUT_MIN = {1'b1, {(OUT_W-1){1'b0}}};

  logic signed [PROD_W-1:0] prod;
  logic signed [PROD_W:0]   sum;
  logic signed [OUT_W-1:0]  sat;

  always_comb begin
    prod = PROD_W'(c.b) * $signed({1'b0, frac});
    sum  = (PROD_W+1)'(c.a) + (PROD_W+1)'(prod >>> SLOPE_FRAC);
    if (sum > (PROD_W+1)'(OUT_MAX))      sat = OUT_MAX;
    else if (sum < (PROD_W+1)'(OUT_MIN)) sat = OUT_MIN;
    else                                 sat = sum[OUT_W-1:0];
  end

  always_ff @(posedge clk)
    out <= sat;

  a_shift_range: assert property (@(posedge clk) !(wr_hit && wr.kind == WR_DOMAIN) || 32'(wr.shift) <= FRAC_W)
    else $error("pwl_table: shift larger than FRAC_W");

endmodule
