// tb_lfsr: checks the jitter LFSR against a bit-serial reference model of
// x^16 + x^14 + x^13 + x^11 + 1, its hold behaviour when cke is low, and that
// its period is the maximal 2^16 - 1.
module tb_lfsr;
  logic clk = 0, rst = 1, cke = 0;
  logic [15:0] out;
  int checks = 0, failures = 0;

  lfsr dut (.clk, .rst, .cke, .out);

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: Galois right shift, feedback bit injected at positions 15,13,12,10
  function automatic logic [15:0] ref_step(logic [15:0] s);
    logic fb;
    fb = s[0];
    s  = s >> 1;
    if (fb) begin
      s[15] = ~s[15]; s[13] = ~s[13]; s[12] = ~s[12]; s[10] = ~s[10];
    end
    return s;
  endfunction

  initial begin
    logic [15:0] model, first;
    int period;
    repeat (2) @(posedge clk);
    rst <= 0;
    @(posedge clk); #1;
    checks++; if (out !== 16'hACE1) begin failures++; $display("seed wrong %h", out); end
    model = out;
    // hold
    repeat (5) @(posedge clk);
    #1 checks++; if (out !== model) begin failures++; $display("changed without cke"); end
    // step and compare
    cke <= 1;
    for (int i = 0; i < 1000; i++) begin
      @(posedge clk); #1;
      model = ref_step(model);
      checks++;
      if (out !== model) begin
        failures++;
        if (failures < 5) $display("step %0d: got %h exp %h", i, out, model);
      end
    end
    // period
    first = out; period = 0;
    do begin
      @(posedge clk); #1; period++;
    end while (out !== first && period < 70000);
    checks++;
    if (period != 65535) begin failures++; $display("period %0d", period); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
