// tb_prbs: compares the PRBS source with an independent PRBS7 recurrence
// b[n] = b[n-7] xor b[n-6] and checks the 127-bit period and that the
// output holds while cke is low.
module tb_prbs;
  logic clk = 0, rst = 1, cke = 0;
  logic tx_data;
  int checks = 0, failures = 0;
  logic hist [$];

  prbs dut (.clk, .rst, .cke, .tx_data);

  always #5 clk = ~clk;

  initial begin
    #100_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [6:0] seed = 7'h7F;
    logic held;
    // reset state 1111111: the last seven bits of history are all ones
    for (int i = 6; i >= 0; i--) hist.push_back(seed[i]);
    repeat (2) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    cke <= 1;
    for (int n = 0; n < 300; n++) begin
      logic expb;
      @(posedge clk); #1;
      expb = hist[hist.size()-7] ^ hist[hist.size()-6];
      hist.push_back(expb);
      checks++;
      if (tx_data !== expb) begin failures++; if (failures < 5) $display("bit %0d got %b", n, tx_data); end
      if (n >= 127) begin
        checks++;
        if (hist[hist.size()-1] !== hist[hist.size()-128]) failures++;
      end
    end
    cke <= 0;
    @(posedge clk); #1 held = tx_data;
    repeat (5) @(posedge clk);
    #1 checks++; if (tx_data !== held) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
