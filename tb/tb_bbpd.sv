// tb_bbpd: exercises every combination of previous bit, edge sample and new
// bit and checks up/down against the early/late truth table, plus the
// register of the previous bit and that nothing is reported without cke.
module tb_bbpd;
  logic clk = 0, rst = 1, cke = 0, samp_p = 0, samp_n = 0;
  logic rx_data, up, down;
  int checks = 0, failures = 0;

  bbpd dut (.clk, .rst, .cke, .samp_p, .samp_n, .rx_data, .up, .down);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic dp, eu, ed;
    int nup = 0, ndn = 0;
    repeat (2) @(negedge clk);
    rst = 0; dp = 0;
    for (int i = 0; i < 400; i++) begin
      samp_p = $urandom_range(0, 1); samp_n = $urandom_range(0, 1); cke = (i % 5 != 0);
      // late: the edge sample already shows the new bit
      eu = cke && (dp != samp_p) && (samp_n == samp_p);
      // early: the edge sample still shows the old bit
      ed = cke && (dp != samp_p) && (samp_n == dp);
      #1 checks++;
      if (up !== eu || down !== ed || rx_data !== samp_p) begin
        failures++; if (failures < 5) $display("dp %b e %b d %b: up %b down %b", dp, samp_n, samp_p, up, down);
      end
      nup += eu; ndn += ed;
      @(negedge clk);
      if (cke) dp = samp_p;
    end
    checks++; if (nup == 0 || ndn == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
