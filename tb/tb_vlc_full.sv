// tb_vlc_full: one complete operation of the centralized transmitter at its
// default size: 100 front-ends, 128-bit messages, length-256 Polar code,
// Manchester line code, 32-entry request FIFO, sys_clk 50 MHz and sr_clk
// 100 kHz.  A new ID message is written for every beacon (the FIFO fills and
// back-pressures the bus); the test checks the 14-cycle latency and spacing
// of every request, prints the time needed to encode all 100 messages, and
// then checks that every one of the 100 outputs sends its own 512-bit frame
// and sends it again unchanged.
module tb_vlc_full;
  import tb_vlc_ref_pkg::*;
  localparam int unsigned NUM_FE = 100, K = 128, N = 256, W = 512;

  logic iClock = 0, reset_n = 0;
  logic req_write = 0, req_read = 0, req_ready, pll_locked;
  logic [6:0] req_addr = '0;
  logic [K-1:0] req_data = '0, bus_rdata;
  logic [NUM_FE-1:0] tx_fe;
  int checks = 0, failures = 0;

  always #10 iClock = ~iClock;   // 50 MHz

  vlc_central_tx_top dut (.*);

  bigvec_t expf [NUM_FE];
  int frames_ok [NUM_FE];
  int frames_rx [NUM_FE];
  int n_backpressure = 0;

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    #40ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // latency / spacing of every request
  int cycle = 0, first_pop = -1, last_we = -1, last_pop = -1;
  int pop_q [$];
  always @(posedge iClock) begin
    cycle++;
    if (reset_n && dut.sys_rst_n) begin
      if (dut.fifo_pop) begin
        if (first_pop < 0) first_pop = cycle;
        else chk(cycle - last_pop == 14, $sformatf("spacing %0d", cycle - last_pop));
        last_pop = cycle;
        pop_q.push_back(cycle);
      end
      if (dut.demux_we) begin
        int p;
        p = pop_q.pop_front();
        chk(cycle + 1 - p == 14, $sformatf("latency %0d at cycle %0d sel %0d stalled %0d fe_busy %0d", cycle + 1 - p, cycle, dut.demux_sel, dut.u_ctrl.stalled, dut.fe_busy[dut.demux_sel]));
        last_we = cycle + 1;
      end
      if (req_write && !req_ready) n_backpressure++;
    end
  end

  // frame receivers
  for (genvar i = 0; i < int'(NUM_FE); i++) begin : g_rx
    bigvec_t cur;
    int nbits = -1;
    initial begin frames_ok[i] = 0; frames_rx[i] = 0; end
    always @(negedge dut.sr_clk) begin
      if (dut.g_fe[i].u_piso.frame_start) begin nbits = 0; cur = '0; end
      if (nbits >= 0) begin
        cur[nbits] = tx_fe[i];
        nbits++;
        if (nbits == int'(W)) begin
          if (cur[W-1:0] == expf[i][W-1:0]) frames_ok[i]++;
          frames_rx[i]++;
          nbits = -1;
        end
      end
    end
  end

  initial begin
    repeat (5) @(negedge iClock);
    reset_n = 1;
    wait (dut.sys_rst_n);
    for (int i = 0; i < int'(NUM_FE); i++) begin
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
    chk(last_we - first_pop == 100 * 14, $sformatf("100 messages took %0d cycles", last_we - first_pop));
    $display("encoding 100 messages: %0d sys_clk cycles = %0d ns at 50 MHz",
             last_we - first_pop, (last_we - first_pop) * 20);
    chk(n_backpressure > 0, "FIFO never full");
    // two frames of 512 bits at 100 kHz, plus synchronisation
    #11ms;
    for (int i = 0; i < int'(NUM_FE); i++) begin
      chk(frames_rx[i] >= 2, $sformatf("fe %0d sent %0d frames", i, frames_rx[i]));
      chk(frames_ok[i] == frames_rx[i], $sformatf("fe %0d sent a wrong frame", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
