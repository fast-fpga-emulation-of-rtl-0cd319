// tb_analog_dynamics: a 12-tap analog dynamics engine driven like the
// emulator drives it: TX edges with jittered spacing, two evaluation cycles
// between them, and a new input value one cycle after every edge. The step
// responses of all 16 settings are loaded with per-tap trimmed domains.
//
// Each cycle the expected output is computed from the pulse-response sum
// y(t) = sum_k x_k (F(t - t_k) - F(t - t_{k-1})) over the last 12 edges, with
// F evaluated by the integer table model: the RTL must match bit for bit,
// one cycle later. The same sum with the exact (real) step response bounds
// the PWL and quantization error to 1 % of full scale. The CTLE setting is
// changed during the run. Taps 1 and 2, where the response rises, are built
// with 64 segments and the others with 32, to cover per-tap table depths.
module tb_analog_dynamics;
  import hsl_pkg::*;
  import hsl_tb_pkg::*;
  localparam int N = 12, SEGB = 5, NSET = 16;
  localparam int FINE_LO = 1, FINE_HI = 2, FINE_SEGB = 6;   // taps 1, 2 have 64 segments
  localparam longint T = 125_000, J = 2_000;
  localparam real SHIFT_T = 3_800_000.0;   // move the 4 ns flight delay to 200 ps

  logic clk = 0, rst = 1, cke = 0;
  emu_time_t emu_time;
  logic signed [VALUE_W-1:0] value;
  logic [3:0] setting;
  pwl_wr_t wr;
  logic signed [ANA_W-1:0] out;
  int checks = 0, failures = 0;

  analog_dynamics #(.N_TAPS(N), .SEG_BITS(SEGB), .FINE_TAP_LO(FINE_LO), .FINE_TAP_HI(FINE_HI),
                   .FINE_SEG_BITS(FINE_SEGB)) dut (.clk, .rst, .emu_time, .cke, .value, .setting, .wr, .out);

  always #5 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint tau0 [N];
  int     shift [N];
  longint a [N][NSET][], b [N][NSET][];

  function automatic real rabs(real x);
    return x < 0.0 ? -x : x;
  endfunction

  function automatic real fref(int s, longint t);
    return step_resp(s, real'(t) + SHIFT_T);
  endfunction

  function automatic int nseg(int k);
    return (k >= FINE_LO && k <= FINE_HI) ? (1 << FINE_SEGB) : (1 << SEGB);
  endfunction

  function automatic longint fq(int k, int s, longint d);
    longint e;
    e = pwl_eval(d, tau0[k], shift[k], nseg(k), a[k][s], b[k][s], ADE_SLOPE_FRAC);
    if (e > 131071) e = 131071;
    if (e < -131072) e = -131072;
    return e;
  endfunction

  longint th [N];   // edge times, th[0] most recent
  longint vh [N];   // vh[0] current value, vh[k] value before edge k-1

  initial begin
    longint t, next_tx, exp_q, pend_q;
    real exp_r, pend_r, maxerr, maxy;
    int s, s_pend, phase;
    logic pend, new_val;
    wr = '0; emu_time = 0; value = 0; setting = 0;
    // ---- load tables
    for (int k = 0; k < N; k++) begin
      tap_domain(k, T, 4_000, nseg(k), tau0[k], shift[k]);
      wr = '0; wr.en = 1; wr.kind = WR_DOMAIN; wr.table_id = 7'(k); wr.tau0 = 32'(tau0[k]); wr.shift = 5'(shift[k]);
      @(negedge clk);
      for (int si = 0; si < NSET; si++) begin
        a[k][si] = new[nseg(k)]; b[k][si] = new[nseg(k)];
        for (int j = 0; j < nseg(k); j++) begin
          real w0, f0, f1;
          w0 = real'(longint'(1) << shift[k]);
          f0 = fref(si, tau0[k] + longint'(j * w0));
          f1 = fref(si, tau0[k] + longint'((j + 1) * w0));
          a[k][si][j] = longint'($floor(f0 * 65536.0 + 0.5));
          b[k][si][j] = longint'($floor((f1 - f0) * 65536.0 / w0 * real'(1 << ADE_SLOPE_FRAC) + 0.5));
          wr = '0; wr.en = 1; wr.kind = WR_COEF; wr.table_id = 7'(k); wr.setting = 4'(si); wr.seg = 8'(j);
          wr.offset = 20'(a[k][si][j]); wr.slope = 20'(b[k][si][j]);
          @(negedge clk);
        end
      end
    end
    wr = '0;
    foreach (th[k]) begin th[k] = 0; vh[k] = 0; end
    @(negedge clk); rst = 0;
    // ---- run
    t = 1000; next_tx = 1000; phase = 0; pend = 0; new_val = 0; maxerr = 0; maxy = 0;
    s = 3;
    for (int c = 0; c < 3000; c++) begin
      if (c == 1500) s = 12;
      setting = 4'(s);
      // this cycle: TX edge or one of two evaluation points
      if (phase == 0) begin t = next_tx; cke = 1; end
      else begin t = t + 30_000 + $urandom_range(0, 10_000); cke = 0; end
      emu_time = 32'(t);
      if (new_val) begin
        int lv;
        lv = $urandom_range(0, 3);
        value = (lv == 0) ? -12'sd256 : (lv == 1) ? -12'sd128 : (lv == 2) ? 12'sd128 : 12'sd256;
        vh[0] = longint'(value);
      end
      new_val = cke;
      // expected output for this cycle's time, history before this cycle's edge
      exp_q = 0; exp_r = 0;
      for (int k = 0; k < N; k++) begin
        longint pulse;
        real pr;
        pulse = fq(k, s, t - th[k]) - ((k == 0) ? 0 : fq(k - 1, s, t - th[k-1]));
        pr    = fref(s, t - th[k]) - ((k == 0) ? 0.0 : fref(s, t - th[k-1]));
        if (th[k] == 0) begin pulse = 0; pr = 0.0; end    // empty history slot
        exp_q += pulse * vh[k];
        exp_r += pr * real'(vh[k]) / 256.0;
      end
      exp_q = exp_q >>> VALUE_FRAC;
      @(negedge clk);
      // the table registers have taken this cycle's lookup: out = y(t)
      pend_q = exp_q; pend_r = exp_r;
      if (pend) begin
        checks++;
        if (longint'(out) != pend_q) begin
          failures++;
          if (failures < 6) $display("cycle %0d: out %0d exp %0d", c, out, pend_q);
        end
        if (rabs(real'(out) / 65536.0 - pend_r) > maxerr) maxerr = rabs(real'(out) / 65536.0 - pend_r);
        if (rabs(pend_r) > maxy) maxy = rabs(pend_r);
      end
      pend = 1;
      if (cke) begin
        for (int k = N - 1; k > 0; k--) begin th[k] = th[k-1]; vh[k] = vh[k-1]; end
        th[0] = t;
        next_tx = t + T + $signed($urandom_range(0, 2 * J)) - J;
      end
      phase = (phase + 1) % 3;
    end
    checks++;
    $display("max |y_rtl - y_exact| = %f of max |y| = %f", maxerr, maxy);
    if (maxerr > 0.01 * maxy || maxy < 0.1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
