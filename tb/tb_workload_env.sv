// tb_workload_env: processing-time sweep for one message length (used by
// tb_vlc_workloads).  For k = 1, 3, 5, 10, 20, 50 and 100 beacons it writes k
// new messages as one burst and measures the sys_clk cycles from the first
// request taken by the Address Pointer to the last frame written into a
// front-end buffer register.  Every frame leaving the DE-MUX is compared with
// the reference encoding of the message of its front-end, and the time must
// be exactly k * (6 + log2(CL)) cycles.
module tb_workload_env #(
  parameter int unsigned K = 128,
  localparam int unsigned N = 2 * K,
  localparam int unsigned NUM_FE = 100,
  localparam int unsigned W = 2 * N,
  localparam int unsigned LAT = 6 + $clog2(N)
) (
  output int checks,
  output int failures,
  output bit finished
);
  import tb_vlc_ref_pkg::*;

  logic iClock = 0, reset_n = 0;
  logic req_write = 0, req_read = 0, req_ready, pll_locked;
  logic [6:0] req_addr = '0;
  logic [K-1:0] req_data = '0, bus_rdata;
  logic [NUM_FE-1:0] tx_fe;

  always #10 iClock = ~iClock;   // 50 MHz

  // Only the message and code lengths differ from the defaults; sr_clk is
  // made faster so that reset completes quickly (the sweep does not depend
  // on it).
  vlc_central_tx_top #(.MSG_LEN(K), .CW_LEN(N), .SR_DIV(8)) dut (.*);

  bigvec_t expf [NUM_FE];
  int cycle = 0, first_pop = -1, last_we = -1, writes = 0;

  initial begin checks = 0; failures = 0; finished = 0; end

  always @(posedge iClock) begin
    cycle++;
    if (reset_n && dut.sys_rst_n) begin
      if (dut.fifo_pop && first_pop < 0) first_pop = cycle;
      if (dut.demux_we) begin
        checks++;
        if (dut.frame !== expf[dut.demux_sel][W-1:0]) begin
          failures++; $display("ML=%0d: wrong frame for beacon %0d", K, dut.demux_sel);
        end
        last_we = cycle + 1;
        writes++;
      end
    end
  end

  localparam int KS [7] = '{1, 3, 5, 10, 20, 50, 100};

  initial begin
    repeat (5) @(negedge iClock);
    reset_n = 1;
    wait (dut.sys_rst_n);
    repeat (5) @(negedge iClock);
    foreach (KS[s]) begin
      int k;
      k = KS[s];
      first_pop = -1; writes = 0;
      for (int i = 0; i < k; i++) begin
        logic [K-1:0] m;
        m = K'(rand_vec(K));
        expf[i] = ref_frame(bigvec_t'(m), N, K, 1'b0);
        @(negedge iClock);
        req_write = 1; req_addr = 7'(i); req_data = m;
        @(posedge iClock);
        while (!req_ready) @(posedge iClock);
        @(negedge iClock);
        req_write = 0;
      end
      while (!dut.fifo_empty || dut.tx_busy || dut.u_ap.busy) @(negedge iClock);
      @(negedge iClock);
      checks++;
      if (writes != k || last_we - first_pop != k * int'(LAT)) begin
        failures++;
        $display("ML=%0d k=%0d: %0d frames in %0d cycles", K, k, writes, last_we - first_pop);
      end
      $display("ML=%0d CL=%0d transmitters=%0d: %0d cycles = %0d ns at 50 MHz",
               K, N, k, last_we - first_pop, (last_we - first_pop) * 20);
      // wait until every buffer register has been taken by its shift register
      while (|dut.fe_busy) @(negedge iClock);
    end
    finished = 1;
  end
endmodule
