// tb_sampler: checks the slicer decision (in_val >= 0) on enabled cycles,
// including the values -1, 0 and the extremes, and the hold otherwise.
module tb_sampler;
  logic clk = 0, rst = 1, cke = 0;
  logic signed [19:0] in_val = 0;
  logic samp;
  int checks = 0, failures = 0;

  sampler #(.W(20)) dut (.clk, .rst, .cke, .in_val, .samp);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic expd, prev;
    repeat (2) @(negedge clk);
    rst = 0; prev = 0;
    for (int i = 0; i < 500; i++) begin
      case (i % 7)
        0: in_val = -1;
        1: in_val = 0;
        2: in_val = 20'sh7FFFF;
        3: in_val = 20'sh80000;
        default: in_val = 20'($urandom);
      endcase
      cke = (i % 3 != 2);
      expd = cke ? (in_val >= 0) : prev;
      @(negedge clk);
      checks++;
      if (samp !== expd) begin failures++; if (failures < 5) $display("in %0d cke %b got %b", in_val, cke, samp); end
      prev = expd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
