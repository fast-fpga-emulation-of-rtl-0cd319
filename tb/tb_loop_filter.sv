// tb_loop_filter: random up/down sequences against a reference PI filter
// (integrator in 1/16 code, proportional term in codes), including the
// start from init, saturation at both ends of the 14-bit code, and the hold
// when cke is low.
module tb_loop_filter;
  logic clk = 0, rst = 1, cke = 0, up = 0, down = 0;
  logic [11:0] kp, ki;
  logic [13:0] init, dco_code;
  int checks = 0, failures = 0;

  loop_filter dut (.clk, .rst, .cke, .up, .down, .kp, .ki, .init, .dco_code);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint integ, code, e;
    int sat_hi = 0, sat_lo = 0;
    kp = 40; ki = 255; init = 1000;
    repeat (2) @(negedge clk);
    checks++; if (dco_code !== 1000) failures++;
    rst = 0; integ = 1000 * 16; code = 1000;
    for (int i = 0; i < 6000; i++) begin
      int bias;
      // drift up, then down, then random
      bias = (i < 2000) ? 90 : (i < 4500) ? 8 : 50;
      cke = $urandom_range(0, 9) != 0;
      up = $urandom_range(0, 99) < bias; down = $urandom_range(0, 99) < (100 - bias) && !up ? 1 : 0;
      if (i % 11 == 0) begin up = 1; down = 1; end
      e = (up && !down) ? 1 : (down && !up) ? -1 : 0;
      @(negedge clk);
      if (cke) begin
        integ += e * ki;
        if (integ < 0) integ = 0;
        if (integ > 16383 * 16) integ = 16383 * 16;
        code = (integ >>> 4) + e * kp;
        if (code < 0) code = 0;
        if (code > 16383) code = 16383;
      end
      if (code == 16383) sat_hi++;
      if (code == 0) sat_lo++;
      checks++;
      if (longint'(dco_code) != code) begin failures++; if (failures < 5) $display("i %0d got %0d exp %0d", i, dco_code, code); end
    end
    checks++; if (sat_hi == 0 || sat_lo == 0) begin failures++; $display("saturation not reached %0d %0d", sat_hi, sat_lo); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
