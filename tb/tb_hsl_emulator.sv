// tb_hsl_emulator: end-to-end run of the link emulator at its default size
// (85 ADE taps of 32 segments, 64 for taps 31 and 32, 16 CTLE settings).
//
// The testbench loads every ADE tap with the trimmed PWL step responses of a
// synthetic channel-plus-CTLE family and the DCO table with
// T = 1/(alpha + beta*n), releases reset with the DCO at code 1000 (7.6 GHz,
// 5 % slow), and runs the link with TX and RX jitter. It checks that
//   - the CDR pulls the DCO code to the 8.0 GHz code 8192 (mean of the last
//     2000 updates within +/-250 codes),
//   - after lock the recovered data equal the transmitted PRBS at some fixed
//     lag with no errors, before and after the CTLE and FFE settings change,
//   - a unit interval costs three emulator cycles (between 2.8 and 3.05),
//   - every mechanism happened: TX edges, RX data and edge-sample edges, a
//     cycle with coincident TX and RX edges, up and down decisions, DFE
//     feedback of both signs, a CTLE setting change and an FFE setting
//     change, jittered TX spacing, a lookup clamped outside a tap's domain,
//   - the DFE output at the data samples after lock forms two levels whose
//     means lie more than four standard deviations from zero (the amplitude
//     histogram of the link's eye).
module tb_hsl_emulator;
  import hsl_pkg::*;
  import hsl_tb_pkg::*;
  localparam int NTAPS = 85, SEGB = 5, NSEG = 1 << SEGB, NSET = 16;
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
    #20_000_000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // table depth of each ADE tap at the top's default parameters
  function automatic int nseg(int k);
    return (k >= 31 && k <= 32) ? 64 : 32;
  endfunction

  task automatic wr_coef(int id, int s, int j, longint a, longint b);
    wr = '0; wr.en = 1; wr.kind = WR_COEF; wr.table_id = 7'(id); wr.setting = 4'(s); wr.seg = 8'(j);
    wr.offset = 20'(a); wr.slope = 20'(b);
    @(negedge clk);
  endtask

  task automatic wr_dom(int id, longint tau0, int shift);
    wr = '0; wr.en = 1; wr.kind = WR_DOMAIN; wr.table_id = 7'(id); wr.tau0 = 32'(tau0); wr.shift = 5'(shift);
    @(negedge clk);
  endtask

  // pulse response of setting s at time t (one UI of +1)
  function automatic real pulse(int s, real t);
    return step_resp(s, t) - step_resp(s, t - real'(T));
  endfunction

  // recorded bit streams
  logic txb [$];
  logic rxb [$];
  int   rx_ui_mark [$];   // rx bit index at which the window checks are taken

  // count errors between the last n rx bits and the tx stream, best lag
  function automatic int best_errors(int n, output int lag);
    int best, e, nr, nt;
    best = n + 1; lag = -1;
    nr = rxb.size(); nt = txb.size();
    for (int L = 0; L < 400; L++) begin
      e = 0;
      for (int i = nr - n; i < nr; i++) begin
        int ti;
        ti = i + (nt - nr) - L;
        if (ti < 0 || ti >= nt) begin e = n + 1; break; end
        if (rxb[i] != txb[ti]) e++;
      end
      if (e < best) begin best = e; lag = L; end
    end
    return best;
  endfunction

  initial begin
    longint tau0;
    int shift, n_tx, n_rxp, n_rxn, n_coinc, n_up, n_dn, n_fb_pos, n_fb_neg, n_ctle_sw, n_ffe_sw;
    int h_n0 = 0, h_n1 = 0;
    real h_s0 = 0, h_s1 = 0, h_q0 = 0, h_q1 = 0, m0, m1, sd0, sd1;
    int n_clamp, cycles, ui_at_mark, cyc_at_mark, lag1, lag2, e1, e2, settle_ui;
    longint code_sum, code_cnt, last_tx, sp_min, sp_max;
    real tpk, hpk, h1, h2, ratio;
    n_tx = 0; n_rxp = 0; n_rxn = 0; n_coinc = 0; n_up = 0; n_dn = 0; n_fb_pos = 0; n_fb_neg = 0;
    n_ctle_sw = 0; n_ffe_sw = 0; n_clamp = 0; cycles = 0; code_sum = 0; code_cnt = 0;
    last_tx = -1; sp_min = 1 << 40; sp_max = 0; settle_ui = -1;
    wr = '0;
    tx_ffe_setting = 4'd4; ctle_setting = 4'd8;
    tx_jitter_scale = 16'd1500; rx_jitter_scale = 16'd1000;
    kp = 12'd3000; ki = 12'd200; init = 14'd1000;
    // DFE weights from the pulse response of the chosen setting (value 1.0 = 256)
    hpk = 0; tpk = 0;
    for (real t = 4.0e6; t < 4.6e6; t += 1000.0) if (pulse(8, t) > hpk) begin hpk = pulse(8, t); tpk = t; end
    h1 = pulse(8, tpk + real'(T)); h2 = pulse(8, tpk + 2.0 * real'(T));
    dfe_w1 = 16'(longint'(h1 * 65536.0)); dfe_w2 = 16'(longint'(h2 * 65536.0));
    $display("pulse peak %f at %0.0f fs, post-cursors %f %f", hpk, tpk, h1, h2);
    // ---- load all tables while in reset
    @(negedge clk);
    for (int k = 0; k < NTAPS; k++) begin
      tap_domain(k, T, 1_500, nseg(k), tau0, shift);
      wr_dom(k, tau0, shift);
      for (int s = 0; s < NSET; s++)
        for (int j = 0; j < nseg(k); j++) begin
          longint a, b;
          coef(s, tau0, shift, j, ADE_SLOPE_FRAC, a, b);
          wr_coef(k, s, j, a, b);
        end
    end
    wr_dom(NTAPS, 0, 12);
    for (int j = 0; j < 4; j++) begin
      real t0, t1;
      t0 = dco_period_fs(j * 4096.0); t1 = dco_period_fs((j + 1) * 4096.0);
      wr_coef(NTAPS, 0, j, longint'($floor(t0 + 0.5)), longint'($floor((t1 - t0) / 4096.0 * 1024.0 + 0.5)));
    end
    wr = '0;
    repeat (4) @(negedge clk);
    rst = 0;
    // ---- run
    for (int c = 0; c < 60000; c++) begin
      @(negedge clk);
      cycles++;
      if (tx_cke) begin
        n_tx++; txb.push_back(tx_data);
        if (last_tx >= 0) begin
          longint sp;
          sp = longint'(emu_time - emu_time_t'(last_tx));
          if (sp < sp_min) sp_min = sp;
          if (sp > sp_max) sp_max = sp;
        end
        last_tx = longint'(emu_time);
      end
      if (rx_cke_p) n_rxp++;
      if (rx_cke_n) n_rxn++;
      if (tx_cke && (rx_cke_p || rx_cke_n)) n_coinc++;
      if (up) n_up++;
      if (down) n_dn++;
      if (dut.bb_en) begin
        rxb.push_back(rx_data);
        if (rxb.size() > 6000) begin code_sum += dco_code; code_cnt++; end
        if (settle_ui < 0 && dco_code > 14'd7400) settle_ui = rxb.size();
      end
      if (dut.rx_p_en) begin
        if (c >= 20000 && c < 36000) begin      // DFE output histogram after lock
          real v;
          v = real'(eq_out) / 65536.0;
          if (v >= 0) begin h_n1++; h_s1 += v; h_q1 += v * v; end
          else begin h_n0++; h_s0 += v; h_q0 += v * v; end
        end
        if (eq_out > ctle_out) n_fb_pos++;
        if (eq_out < ctle_out) n_fb_neg++;
      end
      if (dut.u_ade.g_tap[84].u_table.d[32] || dut.u_ade.g_tap[84].u_table.q >= 33'(NSEG)) n_clamp++;
      if (c == 36000) begin
        ui_at_mark = n_tx; cyc_at_mark = cycles;
        e1 = best_errors(1500, lag1);
        ctle_setting = 4'd9; n_ctle_sw++;      // change the CTLE setting
      end
      if (c == 42000) begin
        tx_ffe_setting = 4'd3; n_ffe_sw++;     // change the TX FFE setting
      end
    end
    e2 = best_errors(1500, lag2);
    ratio = real'(cycles - cyc_at_mark) / real'(n_tx - ui_at_mark);
    // ---- coincident edges: jitter off, DCO table reloaded to a constant
    // 124 ps, so RX edges (41 ps + n * 62 ps) meet TX edges (m * 125 ps)
    rst = 1; tx_jitter_scale = 0; rx_jitter_scale = 0;
    for (int j = 0; j < 4; j++) wr_coef(NTAPS, 0, j, 124_000, 0);
    wr = '0;
    repeat (4) @(negedge clk);
    rst = 0;
    for (int c = 0; c < 600; c++) begin
      @(negedge clk);
      if (tx_cke && (rx_cke_p || rx_cke_n)) n_coinc++;
    end
    m1 = h_s1 / (h_n1 > 0 ? h_n1 : 1); m0 = h_s0 / (h_n0 > 0 ? h_n0 : 1);
    sd1 = $sqrt(h_q1 / (h_n1 > 0 ? h_n1 : 1) - m1 * m1); sd0 = $sqrt(h_q0 / (h_n0 > 0 ? h_n0 : 1) - m0 * m0);
    $display("DFE output at data samples: '1' level %0.4f sd %0.4f (%0d), '0' level %0.4f sd %0.4f (%0d)",
             m1, sd1, h_n1, m0, sd0, h_n0);
    $display("edges: tx %0d rx_p %0d rx_n %0d coincident %0d; up %0d down %0d", n_tx, n_rxp, n_rxn, n_coinc, n_up, n_dn);
    $display("DFE feedback +%0d -%0d; clamped lookups %0d; TX spacing %0d..%0d fs", n_fb_pos, n_fb_neg, n_clamp, sp_min, sp_max);
    $display("cycles per UI %f; mean DCO code after lock %0d; 10%%-band time %0d UI (%0.0f ns)",
             ratio, code_sum / (code_cnt > 0 ? code_cnt : 1), settle_ui, settle_ui * 0.125);
    $display("errors in last 1500 bits: %0d (lag %0d) before, %0d (lag %0d) after the setting changes", e1, lag1, e2, lag2);
    checks++; if (code_cnt == 0 || code_sum / code_cnt < 8192 - 250 || code_sum / code_cnt > 8192 + 250) begin failures++; $display("FAIL: CDR did not lock"); end
    checks++; if (e1 != 0) begin failures++; $display("FAIL: bit errors before setting change"); end
    checks++; if (e2 != 0) begin failures++; $display("FAIL: bit errors after setting change"); end
    checks++; if (ratio < 2.8 || ratio > 3.05) begin failures++; $display("FAIL: cycles per UI"); end
    checks++; if (n_tx == 0 || n_rxp == 0 || n_rxn == 0) begin failures++; $display("FAIL: missing clock edges"); end
    checks++; if (n_coinc == 0) begin failures++; $display("FAIL: no coincident TX/RX edge"); end
    checks++; if (n_up == 0 || n_dn == 0) begin failures++; $display("FAIL: no up or no down"); end
    checks++; if (n_fb_pos == 0 || n_fb_neg == 0) begin failures++; $display("FAIL: DFE feedback"); end
    checks++; if (n_ctle_sw == 0 || n_ffe_sw == 0) begin failures++; $display("FAIL: setting switch"); end
    checks++; if (sp_max - sp_min < 1000 || sp_min < T - 1500 || sp_max >= T + 1500) begin failures++; $display("FAIL: TX jitter"); end
    checks++; if (h_n1 < 100 || h_n0 < 100 || m1 < 4.0 * sd1 || -m0 < 4.0 * sd0) begin failures++; $display("FAIL: DFE output eye"); end
    checks++; if (n_clamp == 0) begin failures++; $display("FAIL: no clamped lookup"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
