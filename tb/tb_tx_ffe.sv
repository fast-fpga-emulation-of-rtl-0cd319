// tb_tx_ffe: feeds random bits to the TX FFE and, for every setting, checks
// channel_in against c_pre*d[n+1] + c_main*d[n] + c_post*d[n-1] computed from
// a preset table written out here in tap-weight form, plus the hold when cke
// is low.
module tb_tx_ffe;
  import hsl_pkg::*;
  logic clk = 0, rst = 1, cke = 0, tx_data = 0;
  logic [3:0] setting = 0;
  logic signed [VALUE_W-1:0] channel_in;
  int checks = 0, failures = 0;

  tx_ffe dut (.clk, .rst, .cke, .tx_data, .setting, .channel_in);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // {pre, main, post} in 1/256
  int W [16][3] = '{'{0, 192, -64}, '{0, 213, -43}, '{0, 205, -51}, '{0, 224, -32},
                    '{0, 256, 0},   '{-26, 230, 0}, '{-32, 224, 0}, '{-26, 179, -51},
                    '{-32, 192, -32}, '{-43, 213, 0}, '{0, 256, 0}, '{0, 256, 0},
                    '{0, 256, 0}, '{0, 256, 0}, '{0, 256, 0}, '{0, 256, 0}};

  initial begin
    int b [$];
    int expv;
    logic signed [VALUE_W-1:0] held;
    b = '{-1, -1};
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int s = 0; s < 16; s++) begin
      for (int i = 0; i < 40; i++) begin
        @(negedge clk);
        setting = 4'(s); tx_data = 1'($urandom); cke = 1;
        b.push_back(tx_data ? 1 : -1);
        expv = W[s][0] * b[$] + W[s][1] * b[$-1] + W[s][2] * b[$-2];
        @(negedge clk); cke = 0;
        checks++;
        if (int'(channel_in) != expv) begin
          failures++;
          if (failures < 6) $display("setting %0d: got %0d exp %0d", s, channel_in, expv);
        end
      end
    end
    held = channel_in;
    tx_data = ~tx_data; setting = 0;
    repeat (3) @(negedge clk);
    checks++; if (channel_in !== held) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
