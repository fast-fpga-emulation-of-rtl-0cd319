// tb_time_manager: compares the time manager cycle by cycle with a reference
// that merges the TX and RX edge sequences in software, for two RX periods;
// checks that every cycle has an edge, that time never goes backwards, and
// that a unit interval takes three emulator cycles (two when TX and RX edges
// coincide, checked with a second instance whose RX clock starts at 0). A
// jittered run checks monotonic time and the bounded TX edge spacing.
module tb_time_manager;
  import hsl_pkg::*;
  logic clk = 0, rst = 1;
  emu_time_t rx_period, t_a, t_b;
  logic [15:0] txj, rxj;
  logic tx_a, rp_a, rn_a, tx_b, rp_b, rn_b;
  int checks = 0, failures = 0;

  time_manager dut (.clk, .rst, .rx_period, .tx_jitter_scale(txj), .rx_jitter_scale(rxj),
                    .emu_time(t_a), .tx_cke(tx_a), .rx_cke_p(rp_a), .rx_cke_n(rn_a));
  time_manager #(.RX_INIT('0)) dut_b (.clk, .rst, .rx_period, .tx_jitter_scale(16'd0),
                    .rx_jitter_scale(16'd0), .emu_time(t_b), .tx_cke(tx_b), .rx_cke_p(rp_b), .rx_cke_n(rn_b));

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ntx, nrx, t;
    int rxph, cycles, uis, cyc_b, uis_b;
    emu_time_t prev, last_tx;
    rx_period = 125_000; txj = 0; rxj = 0;
    repeat (2) @(posedge clk);
    rst <= 0;
    ntx = 0; nrx = 41_000; rxph = 0; cycles = 0; uis = 0; cyc_b = 0; uis_b = 0;
    for (int c = 0; c < 3000; c++) begin
      logic etx, erp, ern;
      @(negedge clk);
      t = (ntx < nrx) ? ntx : nrx;
      etx = (ntx == t); erp = (nrx == t) && rxph == 0; ern = (nrx == t) && rxph == 1;
      checks++;
      if (t_a !== emu_time_t'(t) || tx_a !== etx || rp_a !== erp || rn_a !== ern) begin
        failures++;
        if (failures < 5) $display("cycle %0d: time %0d/%0d flags %b%b%b/%b%b%b", c, t_a, t,
                                   tx_a, rp_a, rn_a, etx, erp, ern);
      end
      if (c == 1499) rx_period = 124_000;  // used by the updates at the end of this cycle
      if (etx) ntx += 125_000;
      if (nrx == t) begin nrx += rx_period >> 1; rxph ^= 1; end
      cycles++; if (etx) uis++;
      if (c < 1500) begin cyc_b++; if (tx_b) uis_b++; end
      checks++; if (!(tx_b || rp_b || rn_b)) failures++;
      if (c == 1499) begin
        checks++;
        if (cycles != 3 * uis && cycles != 3 * uis - 1 && cycles != 3 * uis + 2) begin
          failures++; $display("cycles %0d for %0d UI", cycles, uis);
        end
        $display("non-coincident: %0d cycles / %0d UI", cycles, uis);
      end
    end
    checks++;
    if (uis_b == 0 || cyc_b > 2 * uis_b + 1 || cyc_b < 2 * uis_b - 1) begin
      failures++; $display("coincident: %0d cycles for %0d UI", cyc_b, uis_b);
    end
    $display("coincident: %0d cycles / %0d UI", cyc_b, uis_b);
    // jitter
    txj = 2000; rxj = 1500; prev = t_a; last_tx = 0;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      checks++;
      if (!time_before(prev, t_a) || !(tx_a || rp_a || rn_a)) begin failures++; $display("time not advancing"); end
      if (tx_a) begin
        if (last_tx != 0) begin
          longint sp;
          sp = longint'(t_a - last_tx);
          checks++;
          if (sp < 123_000 || sp >= 127_000) begin failures++; $display("tx spacing %0d", sp); end
        end
        last_tx = t_a;
      end
      prev = t_a;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
