// tb_accuracy_sweep: transient accuracy of the full-size emulator over all
// 16 CTLE x 10 TX FFE configurations, 1024 UI each, with TX and RX jitter.
//
// The CDR is held open (kp = ki = 0, code 8192) so the RX clock samples at a
// fixed rate. At every RX edge the testbench computes the exact channel-plus-
// CTLE output from the real-valued step response, the observed TX edge times
// and the observed FFE output values:
//   y(t) = sum_i v_i * (F(t - t_i) - F(t - t_{i+1}))  over the last 100 edges.
// The emulator's ctle_out one cycle later is compared with it. Per
// configuration the signed error relative to max|y| is recorded; the worst
// magnitude must stay below 1 %. The first 64 UI after a configuration
// change are not scored. The tap domains use the true per-UI jitter bound of
// the TX clock (J = 1.5 ps for jitter_scale 1500).
module tb_accuracy_sweep;
  import hsl_pkg::*;
  import hsl_tb_pkg::*;
  localparam int NTAPS = 85, NSEG = 32, NSET = 16, HIST = 128;
  localparam longint T = 125_000;

  logic clk = 0, rst = 1;
  pwl_wr_t wr;
  logic [3:0] tx_ffe_setting, ctle_setting;
  logic [15:0] tx_jitter_scale, rx_jitter_scale;
  logic [11:0] kp, ki;
  logic [13:0] init;
  logic signed [15:0] dfe_w1, dfe_w2;
  emu_time_t emu_time, rx_period;
  logic tx_cke, rx_cke_p, rx_cke_n, tx_data, samp_p, samp_n, rx_data, up, down;
  logic signed [VALUE_W-1:0] channel_in;
  logic signed [ANA_W-1:0] ctle_out, eq_out;
  logic [13:0] dco_code;
  int checks = 0, failures = 0;

  hsl_emulator dut (.*);

  always #5 clk = ~clk;

  initial begin
    #60_000_000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // table depth of each ADE tap at the top's default parameters
  function automatic int nseg(int k);
    return (k >= 31 && k <= 32) ? 64 : 32;
  endfunction

  task automatic wr_word(int id, logic kind, int s, int j, longint a, longint b, longint tau0, int shift);
    wr = '0; wr.en = 1; wr.kind = pwl_wr_kind_e'(kind); wr.table_id = 7'(id); wr.setting = 4'(s);
    wr.seg = 8'(j); wr.offset = 20'(a); wr.slope = 20'(b); wr.tau0 = 32'(tau0); wr.shift = 5'(shift);
    @(negedge clk);
  endtask

  longint te [HIST];   // edge times (circular)
  real    ve [HIST];   // value after each edge
  int     ne;          // number of edges recorded

  // emulation time is 32-bit and wraps every 4.29 us; differences are taken
  // modulo 2^32 like in the RTL
  function automatic longint dt32(longint t, longint e);
    logic [31:0] d;
    d = 32'(t) - 32'(e);
    return longint'(d);
  endfunction

  function automatic real y_exact(int s, longint t);
    real y;
    int i0;
    y = 0.0;
    i0 = (ne > 100) ? ne - 100 : 0;
    for (int i = i0; i < ne; i++) begin
      real p;
      p = step_resp(s, real'(dt32(t, te[i % HIST])));
      if (i + 1 < ne) p -= step_resp(s, real'(dt32(t, te[(i + 1) % HIST])));
      y += ve[i % HIST] * p;
    end
    return y;
  endfunction

  initial begin
    longint tau0;
    int shift, worst_cfg;
    real emax, emin, ymax, worst, pend_y, worst_lo, worst_hi;
    logic pend, prev_tx;
    int ui_in_cfg;
    wr = '0;
    tx_ffe_setting = 0; ctle_setting = 0;
    tx_jitter_scale = 16'd1500; rx_jitter_scale = 16'd1000;
    kp = 0; ki = 0; init = 14'd8192; dfe_w1 = 0; dfe_w2 = 0;
    @(negedge clk);
    for (int k = 0; k < NTAPS; k++) begin
      tap_domain(k, T, 1_500, nseg(k), tau0, shift);
      wr_word(k, 1'b1, 0, 0, 0, 0, tau0, shift);
      for (int s = 0; s < NSET; s++)
        for (int j = 0; j < nseg(k); j++) begin
          longint a, b;
          coef(s, tau0, shift, j, ADE_SLOPE_FRAC, a, b);
          wr_word(k, 1'b0, s, j, a, b, 0, 0);
        end
    end
    wr_word(NTAPS, 1'b1, 0, 0, 0, 0, 0, 12);
    for (int j = 0; j < 4; j++) begin
      real t0, t1;
      t0 = dco_period_fs(j * 4096.0); t1 = dco_period_fs((j + 1) * 4096.0);
      wr_word(NTAPS, 1'b0, 0, j, longint'($floor(t0 + 0.5)), longint'($floor((t1 - t0) / 4096.0 * 1024.0 + 0.5)), 0, 0);
    end
    wr = '0;
    repeat (4) @(negedge clk);
    rst = 0;
    ne = 0; pend = 0; prev_tx = 0; worst = 0; worst_cfg = -1; worst_lo = 0; worst_hi = 0;
    for (int cfg = 0; cfg < 160; cfg++) begin
      ctle_setting = 4'(cfg % 16); tx_ffe_setting = 4'(cfg / 16);
      emax = 0; emin = 0; ymax = 0; ui_in_cfg = 0;
      while (ui_in_cfg < 1024 + 64) begin
        @(negedge clk);
        if (prev_tx) ve[(ne - 1) % HIST] = real'(channel_in) / 256.0;
        if (pend && ui_in_cfg > 64) begin
          real e;
          e = real'(ctle_out) / 65536.0 - pend_y;
          if (e > emax) emax = e;
          if (e < emin) emin = e;
          if (pend_y > ymax) ymax = pend_y;
          if (-pend_y > ymax) ymax = -pend_y;
        end
        pend = rx_cke_p || rx_cke_n;
        if (pend) pend_y = y_exact(cfg % 16, longint'(emu_time));
        if (tx_cke) begin
          te[ne % HIST] = longint'(emu_time); ve[ne % HIST] = (ne > 0) ? ve[(ne - 1) % HIST] : 0.0;
          ne++; ui_in_cfg++;
        end
        prev_tx = tx_cke;
      end
      checks++;
      if (ymax < 0.05) begin failures++; $display("config %0d: no signal", cfg); end
      if (emin / ymax < worst_lo) worst_lo = emin / ymax;
      if (emax / ymax > worst_hi) worst_hi = emax / ymax;
      if ((emax - emin) > 0 && (emax > -emin ? emax : -emin) / ymax > worst) begin
        worst = (emax > -emin ? emax : -emin) / ymax; worst_cfg = cfg;
      end
      checks++;
      if ((emax > -emin ? emax : -emin) / ymax > 0.01) begin
        failures++; $display("config ctle %0d ffe %0d: error %f / %f", cfg % 16, cfg / 16, emin / ymax, emax / ymax);
      end
    end
    $display("160 configurations x 1024 UI: worst relative error %0.2f %% / +%0.2f %% (worst config ctle %0d ffe %0d)",
             100.0 * worst_lo, 100.0 * worst_hi, worst_cfg % 16, worst_cfg / 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
