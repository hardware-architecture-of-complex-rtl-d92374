// tb_kb_control: after reset the schedule must be one RESET cycle, then
// repeated periods of K fill cycles (kcnt 0..K-1) and K select cycles
// (scnt 0..K-1), `last` only in the final select cycle: a period of 2K = 8
// cycles at K = 4. A second reset in the middle must restart it.
module tb_kb_control;
  import kb_pkg::*;
  localparam int K = 4;
  logic clk = 0, rst = 1;
  ctl_t ctl;
  int checks = 0, failures = 0;
  int lasts, period;

  always #5 clk = ~clk;
  kb_control #(.K(K)) dut (.*);

  task automatic expect_cycle(bit f, bit s, int kc, int sc, bit l);
    checks++;
    if (ctl.fill !== f || ctl.select !== s || (f && int'(ctl.kcnt) != kc) ||
        (s && int'(ctl.scnt) != sc) || ctl.last !== l) begin
      failures++;
      if (failures < 5)
        $display("FAIL: got fill %0b select %0b k %0d s %0d last %0b, expected %0b %0b %0d %0d %0b",
                 ctl.fill, ctl.select, ctl.kcnt, ctl.scnt, ctl.last, f, s, kc, sc, l);
    end
  endtask

  initial begin
    for (int run = 0; run < 2; run++) begin
      rst = 1;
      @(negedge clk); @(negedge clk);
      rst = 0;
      expect_cycle(0, 0, 0, 0, 0);          // RESET state
      @(negedge clk);
      for (int p = 0; p < 20; p++) begin
        for (int c = 0; c < K; c++) begin expect_cycle(1, 0, c, 0, 0); @(negedge clk); end
        for (int c = 0; c < K; c++) begin expect_cycle(0, 1, 0, c, c == K - 1); @(negedge clk); end
      end
      // abort in the middle of a period
      repeat (3) @(negedge clk);
    end
    // period length measured from `last` pulses
    lasts = 0; period = 0;
    while (lasts < 2) begin
      @(negedge clk);
      if (lasts == 1) period++;
      if (ctl.last) lasts++;
    end
    checks++;
    if (period != 2 * K) begin failures++; $display("FAIL: period %0d", period); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
