// tb_rx_dfe: random decisions and CTLE values; checks
// eq_out = ctle_out - w1*d[n-1] - w2*d[n-2] with d = +/-1, where d[n-2] is
// tracked here from the decisions seen on enabled cycles.
module tb_rx_dfe;
  logic clk = 0, rst = 1, cke = 0, rx_data = 0;
  logic signed [15:0] w1, w2;
  logic signed [19:0] ctle_out, eq_out;
  int checks = 0, failures = 0;

  rx_dfe #(.W(20), .COEF_W(16)) dut (.clk, .rst, .cke, .rx_data, .w1, .w2, .ctle_out, .eq_out);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d2;
    longint e;
    w1 = 16'sd9000; w2 = -16'sd2500; ctle_out = 0;
    repeat (2) @(negedge clk);
    rst = 0; d2 = -1;   // reset value 0 reads as -1
    for (int i = 0; i < 1000; i++) begin
      if (i == 500) begin w1 = 16'sd3000; w2 = 16'sd1200; end
      ctle_out = 20'($signed(17'($urandom)));
      e = longint'(ctle_out) - (rx_data ? 1 : -1) * longint'(w1) - d2 * longint'(w2);
      #1 checks++;
      if (longint'(eq_out) != e) begin failures++; if (failures < 5) $display("i %0d got %0d exp %0d", i, eq_out, e); end
      cke = $urandom_range(0, 1);
      @(negedge clk);
      if (cke) d2 = rx_data ? 1 : -1;
      rx_data = $urandom_range(0, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
