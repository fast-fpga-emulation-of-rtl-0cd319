// tb_dco_table: the 160-bit DCO table (one setting, four segments of 4096
// codes, 20-bit offsets and slopes) loaded with chords of
// T = 1/(alpha + beta*n); checks the registered period against the exact
// curve to 0.05 % for every 37th code, the end points from the paper
// (code 1000 -> 7.6 GHz, code 8192 -> 8.0 GHz) and the one-cycle latency.
module tb_dco_table;
  import hsl_pkg::*;
  import hsl_tb_pkg::*;
  logic clk = 0;
  logic [13:0] code;
  pwl_wr_t wr;
  logic signed [19:0] period;
  int checks = 0, failures = 0;

  pwl_table #(.IN_W(14), .N_SETTINGS(1), .SETTING_W(1), .SEG_BITS(2), .OFFSET_W(20), .SLOPE_W(20),
              .SLOPE_FRAC(10), .OUT_W(20), .FRAC_W(12), .TABLE_ID(85))
    dut (.clk, .in_val(code), .setting(1'b0), .wr, .out(period));

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ex, maxrel;
    wr = '0; code = 0;
    @(negedge clk);
    wr.en = 1; wr.kind = WR_DOMAIN; wr.table_id = 85; wr.tau0 = 0; wr.shift = 12;
    @(negedge clk);
    for (int j = 0; j < 4; j++) begin
      real t0, t1;
      t0 = dco_period_fs(j * 4096.0); t1 = dco_period_fs((j + 1) * 4096.0);
      wr = '0; wr.en = 1; wr.kind = WR_COEF; wr.table_id = 85; wr.seg = 8'(j);
      wr.offset = 20'(longint'($floor(t0 + 0.5)));
      wr.slope  = 20'(longint'($floor((t1 - t0) / 4096.0 * 1024.0 + 0.5)));
      @(negedge clk);
    end
    wr = '0; maxrel = 0;
    for (int n = 0; n < 16384; n += 37) begin
      code = 14'(n);
      @(negedge clk);
      ex = dco_period_fs(n);
      checks++;
      if ((real'(period) - ex) / ex > 5e-4 || (ex - real'(period)) / ex > 5e-4) begin
        failures++; if (failures < 5) $display("code %0d: %0d fs exp %f", n, period, ex);
      end
    end
    code = 1000; @(negedge clk);
    checks++; if (period < 131_500 || period > 131_650) begin failures++; $display("code 1000: %0d", period); end
    code = 8192; #1;
    checks++; if (period < 131_500) failures++;          // still the old value: one-cycle latency
    @(negedge clk);
    checks++; if (period < 124_990 || period > 125_010) begin failures++; $display("code 8192: %0d", period); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
