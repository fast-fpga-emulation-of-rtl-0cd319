// tb_pwl_table: loads random offsets and slopes into two settings of a
// 16-segment table with a random domain, then compares 3000 random lookups
// (inside, before and after the domain) with the integer reference model,
// checking the one-cycle latency. A second domain write checks that the
// domain can be moved at run time.
module tb_pwl_table;
  import hsl_pkg::*;
  import hsl_tb_pkg::*;
  localparam int SEGB = 4, NS = 1 << SEGB, SF = 12;
  logic clk = 0;
  logic [31:0] in_val;
  logic [3:0] setting;
  pwl_wr_t wr;
  logic signed [17:0] out;
  int checks = 0, failures = 0;

  pwl_table #(.SEG_BITS(SEGB), .SLOPE_FRAC(SF), .TABLE_ID(3)) dut (.clk, .in_val, .setting, .wr, .out);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint a [16][], b [16][];

  task automatic load_domain(longint tau0, int shift);
    wr = '0; wr.en = 1; wr.kind = WR_DOMAIN; wr.table_id = 3; wr.tau0 = 32'(tau0); wr.shift = 5'(shift);
    @(negedge clk); wr = '0;
  endtask

  task automatic run(longint tau0, int shift, int n);
    for (int i = 0; i < n; i++) begin
      longint x, e;
      int s;
      s = $urandom_range(0, 1) * 9;          // settings 0 and 9
      x = tau0 + longint'($urandom_range(0, (NS + 2) << shift)) - (longint'(1) << shift);
      if (x < 0) x = 0;
      in_val = 32'(x); setting = 4'(s);
      e = pwl_eval(x, tau0, shift, NS, a[s], b[s], SF);
      if (e > 131071) e = 131071;
      if (e < -131072) e = -131072;
      @(negedge clk);
      checks++;
      if (longint'(out) != e) begin
        failures++;
        if (failures < 6) $display("x=%0d s=%0d got %0d exp %0d", x, s, out, e);
      end
    end
  endtask

  initial begin
    wr = '0; in_val = 0; setting = 0;
    foreach (a[s]) begin a[s] = new[NS]; b[s] = new[NS]; end
    @(negedge clk);
    foreach (a[s]) for (int j = 0; j < NS; j++) begin
      a[s][j] = longint'($signed(18'($urandom)));
      b[s][j] = longint'($signed(18'($urandom)));
      wr = '0; wr.en = 1; wr.kind = WR_COEF; wr.table_id = 3; wr.setting = 4'(s); wr.seg = 8'(j);
      wr.offset = 20'(a[s][j]); wr.slope = 20'(b[s][j]);
      @(negedge clk);
    end
    // writes to another table id must be ignored
    wr = '0; wr.en = 1; wr.kind = WR_COEF; wr.table_id = 4; wr.setting = 0; wr.seg = 0; wr.offset = 20'h1234;
    @(negedge clk); wr = '0;
    load_domain(1_000_000, 10);
    run(1_000_000, 10, 1500);
    load_domain(52_345, 7);
    run(52_345, 7, 1500);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
