// tb_clock_module: drives a two-phase clock module as the time manager would
// (time_in = time_out, with some cycles where time_in is a different time)
// and checks: the phase pattern of cke_out, no edge when the times differ,
// edge spacing equal to period without jitter, and, with jitter, spacing
// predicted exactly from a reference LFSR model and bounded by period +/- J.
module tb_clock_module;
  import hsl_pkg::*;
  logic clk = 0, rst = 1;
  emu_time_t time_in, period, time_out;
  logic [15:0] jitter_scale;
  logic [1:0] cke_out;
  int checks = 0, failures = 0;

  clock_module #(.N_PHASES(2), .INIT_TIME(32'd1000), .LFSR_SEED(16'h1234)) dut (
    .clk, .rst, .time_in, .period, .jitter_scale, .time_out, .cke_out);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] ref_lfsr(logic [15:0] s);
    return (s >> 1) ^ (s[0] ? 16'hB400 : 16'h0);
  endfunction

  initial begin
    emu_time_t t_exp;
    logic [15:0] r;
    int phase;
    longint sp, mn, mx;
    period = 62_500; jitter_scale = 0; time_in = 0;
    repeat (2) @(posedge clk);
    rst <= 0;
    @(negedge clk);
    checks++; if (time_out !== 1000 || cke_out !== 2'b00) failures++;
    t_exp = 1000; phase = 0; r = 16'h1234;
    // no jitter: 40 edges, with a non-matching cycle between some of them
    for (int i = 0; i < 40; i++) begin
      if (i % 3 == 0) begin
        time_in = time_out - 5;  // earlier time: no edge of this clock
        #1 checks++; if (cke_out !== 2'b00) begin failures++; $display("edge on mismatch"); end
        @(negedge clk);
      end
      time_in = time_out;
      #1;
      checks++; if (time_out !== t_exp) begin failures++; $display("time_out %0d exp %0d", time_out, t_exp); end
      checks++; if (cke_out !== (phase == 0 ? 2'b01 : 2'b10)) begin failures++; $display("cke %b phase %0d", cke_out, phase); end
      @(negedge clk);
      t_exp += period; phase ^= 1; r = ref_lfsr(r);
    end
    // with jitter J = 3000 fs
    jitter_scale = 3000; mn = 1 << 40; mx = 0;
    for (int i = 0; i < 2000; i++) begin
      emu_time_t t_before;
      longint jit;
      time_in = time_out; t_before = time_out;
      jit = (longint'(3000) * longint'($signed(r))) >>> 15;
      @(negedge clk);
      r = ref_lfsr(r);
      sp = longint'(time_out - t_before);
      checks++;
      if (sp != 62_500 + jit) begin failures++; if (failures < 5) $display("spacing %0d exp %0d", sp, 62_500 + jit); end
      if (sp < mn) mn = sp;
      if (sp > mx) mx = sp;
    end
    checks++;
    if (mn < 62_500 - 3000 || mx >= 62_500 + 3000 || mx - mn < 5000) begin
      failures++; $display("jitter range %0d..%0d", mn, mx);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
