// tb_system_pll: the PLL model at its default ratio.  Checks that locked
// rises after reset, that sys_clk follows the 50 MHz reference and that
// sr_clk has a period of exactly 500 reference cycles (100 kHz) with a 50 %
// duty cycle.
module tb_system_pll;
  logic iClock = 0, areset = 1;
  logic sys_clk, sr_clk, locked;
  int checks = 0, failures = 0;

  always #10 iClock = ~iClock;   // 50 MHz

  system_pll dut (.*);

  initial begin
    repeat (20000) @(posedge iClock);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ref_cnt = 0;
  always @(posedge iClock) ref_cnt++;

  initial begin
    int t_rise, t_fall, t_prev;
    repeat (3) @(posedge iClock);
    checks++; if (locked) failures++;
    areset = 0;
    wait (locked);
    checks++; if (ref_cnt > 30) begin failures++; $display("lock too late"); end
    for (int i = 0; i < 20; i++) begin
      @(negedge iClock);
      checks++; if (sys_clk !== iClock) failures++;
    end
    @(posedge sr_clk); t_prev = ref_cnt;
    for (int p = 0; p < 8; p++) begin
      @(negedge sr_clk); t_fall = ref_cnt;
      @(posedge sr_clk); t_rise = ref_cnt;
      checks++;
      if (t_rise - t_prev != 500) begin failures++; $display("period %0d", t_rise - t_prev); end
      checks++;
      if (t_fall - t_prev != 250) begin failures++; $display("high time %0d", t_fall - t_prev); end
      t_prev = t_rise;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
