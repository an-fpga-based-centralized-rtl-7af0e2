// system_pll: behavioural model of the System PLL (an FPGA PLL, analog).
//
// The real part is the vendor PLL of the FPGA.  From the 50 MHz reference
// iClock it makes sys_clk (50 MHz, the processor and transmitter clock) and
// sr_clk (100 kHz, the front-end bit clock).  This model passes the reference
// through as sys_clk and divides it by SR_DIV (even, default 500) for sr_clk,
// with a 50 % duty cycle.  locked rises LOCK_CYCLES reference cycles after
// areset is released.  It is a model for simulation: it does not reproduce
// the phase, jitter or lock behaviour of a real PLL.
module system_pll #(
  parameter int unsigned SR_DIV      = 500,  // 50 MHz / 100 kHz
  parameter int unsigned LOCK_CYCLES = 16
) (
  input  logic iClock,
  input  logic areset,
  output logic sys_clk,
  output logic sr_clk,
  output logic locked
);

  int unsigned div_cnt;
  int unsigned lock_cnt;

  assign sys_clk = iClock;

  always @(posedge iClock or posedge areset) begin
    if (areset) begin
      div_cnt  <= 0;
      sr_clk   <= 1'b0;
      lock_cnt <= 0;
      locked   <= 1'b0;
    end else begin
      if (div_cnt == SR_DIV / 2 - 1) begin
        div_cnt <= 0;
        sr_clk  <= ~sr_clk;
      end else begin
        div_cnt <= div_cnt + 1;
      end
      if (lock_cnt == LOCK_CYCLES) locked <= 1'b1;
      else                         lock_cnt <= lock_cnt + 1;
    end
  end

endmodule
