// tb_top_env: end-to-end test bench environment for one configuration of the
// centralized transmitter (used by tb_vlc_central_tx_top).
//
// It writes a message to every front-end, then random updates (some of them
// back-to-back to the same front-end), holding each request while req_ready
// is low.  For every front-end it cuts the serial output tx_fe[i] into frames
// (at the shift register's frame_start) and requires each received frame to
// be the reference encoding of a message written to that front-end, in
// non-decreasing order of writing, and the last frame to be the last message.
// It checks the latency from request pop to buffer register (6 + log2(N)
// cycles, 14 at N = 256) and the equal spacing of back-to-back requests, reads messages back over the
// bus, and counts the mechanisms: FIFO-full back-pressure, controller stall,
// frame repetition and frame replacement at a boundary.
module tb_top_env #(
  parameter int unsigned   NUM_FE     = 8,
  parameter int unsigned   K          = 8,
  parameter int unsigned   N          = 16,
  parameter vlc_pkg::rll_e RLL        = vlc_pkg::RLL_MANCHESTER,
  parameter int unsigned   FIFO_DEPTH = 4,
  parameter int unsigned   SR_DIV     = 8,
  parameter int unsigned   UPDATES    = 60,
  localparam int unsigned  AW         = (NUM_FE > 1) ? $clog2(NUM_FE) : 1,
  localparam int unsigned  W          = vlc_pkg::rll_len(RLL, N),
  // pop -> buffer register: 4 cycles fetch, log2(N)+2 encode, 1 write+1
  localparam int unsigned  LAT        = 6 + $clog2(N)
) (
  output int checks,
  output int failures,
  output bit finished
);
  import tb_vlc_ref_pkg::*;

  logic iClock = 0, reset_n = 0;
  logic req_write = 0, req_read = 0, req_ready, pll_locked;
  logic [AW-1:0] req_addr = '0;
  logic [K-1:0] req_data = '0, bus_rdata;
  logic [NUM_FE-1:0] tx_fe;

  always #5 iClock = ~iClock;

  vlc_central_tx_top #(
    .NUM_FE(NUM_FE), .MSG_LEN(K), .CW_LEN(N), .RLL(RLL),
    .FIFO_DEPTH(FIFO_DEPTH), .SR_DIV(SR_DIV)
  ) dut (.*);

  bigvec_t hist [NUM_FE][$];
  logic [K-1:0] latest [NUM_FE];
  int last_idx [NUM_FE];
  int frames_rx [NUM_FE];
  int n_backpressure = 0, n_stall = 0, n_repeat = 0, n_replace = 0;
  int n_lat = 0, n_interval = 0;
  int cycle = 0;

  initial begin checks = 0; failures = 0; finished = 0; end

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL(%s): %s", RLL.name(), s); end
  endtask

  // ---------------------------------------------- latency and throughput
  int pop_q [$];
  int last_pop = -1000;
  bit last_pop_backlog = 0;
  logic stalled_d = 0;
  always @(posedge iClock) begin
    cycle++;
    if (reset_n && dut.sys_rst_n) begin
      if (dut.fifo_pop) begin
        // next request taken 14 cycles after the previous one when the
        // FIFO was never empty in between and no stall occurred
        if (last_pop_backlog) begin
          chk(cycle - last_pop == int'(LAT), $sformatf("request spacing %0d", cycle - last_pop));
          n_interval++;
        end
        pop_q.push_back(cycle);
        last_pop = cycle;
        last_pop_backlog = 1;
      end
      if (dut.fifo_empty || dut.u_ctrl.stalled) last_pop_backlog = 0;
      if (dut.demux_we) begin
        int p;
        p = pop_q.pop_front();
        if (!stalled_d) begin
          chk(cycle + 1 - p == int'(LAT), $sformatf("latency %0d", cycle + 1 - p));
          n_lat++;
        end
      end
      if (dut.u_ctrl.stalled && !stalled_d) n_stall++;
      stalled_d <= dut.u_ctrl.stalled;
      if (req_write && !req_ready) n_backpressure++;
    end
  end

  // ---------------------------------------------- per front-end receivers
  for (genvar i = 0; i < int'(NUM_FE); i++) begin : g_rx
    bigvec_t cur, prev;
    int nbits = -1;
    initial begin last_idx[i] = -1; frames_rx[i] = 0; end
    always @(negedge dut.sr_clk) begin
      if (dut.g_fe[i].u_piso.frame_start) begin
        nbits = 0;
        cur = '0;
      end
      if (nbits >= 0) begin
        cur[nbits] = tx_fe[i];
        nbits++;
        if (nbits == int'(W)) begin
          int found;
          found = -1;
          for (int j = (last_idx[i] < 0 ? 0 : last_idx[i]); j < hist[i].size(); j++)
            if (found < 0 && hist[i][j][W-1:0] == cur[W-1:0]) found = j;
          chk(found >= 0, $sformatf("fe %0d sent a frame that was never written / out of order", i));
          if (frames_rx[i] > 0) begin
            if (cur[W-1:0] == prev[W-1:0]) n_repeat++;
            else n_replace++;
          end
          if (found >= 0) last_idx[i] = found;
          prev = cur;
          frames_rx[i]++;
          nbits = -1;
        end
      end
    end
  end

  // ---------------------------------------------- stimulus
  task automatic bus_write(input int a, input logic [K-1:0] m);
    @(negedge iClock);
    req_write = 1; req_addr = AW'(a); req_data = m;
    @(posedge iClock);
    while (!req_ready) @(posedge iClock);
    // accepted at this edge
    hist[a].push_back(ref_frame(bigvec_t'(m), N, K, RLL == vlc_pkg::RLL_4B6B));
    latest[a] = m;
    @(negedge iClock);
    req_write = 0;
  endtask

  initial begin
    repeat (5) @(negedge iClock);
    reset_n = 1;
    wait (dut.sys_rst_n);
    // initial configuration of every beacon, as one burst
    for (int i = 0; i < int'(NUM_FE); i++) bus_write(i, K'(rand_vec(K)));
    // random updates
    for (int u = 0; u < int'(UPDATES); u++) begin
      int a;
      a = int'($urandom % NUM_FE);
      bus_write(a, K'(rand_vec(K)));
      if ($urandom % 4 == 0) begin
        // same beacon again after the first request has been encoded
        repeat (20) @(negedge iClock);
        bus_write(a, K'(rand_vec(K)));
      end
      repeat ($urandom % (W * SR_DIV)) @(negedge iClock);
    end
    // let everything drain, then let each beacon send two more frames
    while (!dut.fifo_empty || dut.tx_busy || dut.u_ap.busy || (|dut.fe_busy)) @(negedge iClock);
    repeat (3 * W * SR_DIV + 20 * SR_DIV) @(negedge iClock);
    for (int i = 0; i < int'(NUM_FE); i++) begin
      chk(frames_rx[i] > 1, $sformatf("fe %0d sent no frames", i));
      chk(last_idx[i] == hist[i].size() - 1, $sformatf("fe %0d does not send its last message", i));
    end
    // bus read-back of the message memory
    for (int i = 0; i < int'(NUM_FE); i++) begin
      @(negedge iClock); req_read = 1; req_addr = AW'(i);
      @(negedge iClock); req_read = 0;
      chk(bus_rdata == latest[i], "bus read-back");
    end
    chk(n_backpressure > 0, "FIFO-full back-pressure never happened");
    chk(n_stall > 0, "controller stall never happened");
    chk(n_repeat > 0, "frame repetition never happened");
    chk(n_replace > 0, "frame replacement never happened");
    chk(n_lat > 0 && n_interval > 0, "latency/spacing never measured");
    $display("%s: backpressure=%0d stalls=%0d repeats=%0d replacements=%0d latency_checks=%0d spacing_checks=%0d",
             RLL.name(), n_backpressure, n_stall, n_repeat, n_replace, n_lat, n_interval);
    finished = 1;
  end
endmodule
