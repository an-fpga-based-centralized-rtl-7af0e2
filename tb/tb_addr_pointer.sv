// tb_addr_pointer: the Address Pointer against a FIFO queue, a memory array
// and a busy model of the Controller.  Checks that a request is taken only
// when the FIFO is non-empty and the transmitter is idle, that the memory is
// read at the popped address one cycle after the pop, that msg_valid follows
// three cycles after the pop with that memory word and address, and that
// every queued request is served once and in order.
module tb_addr_pointer;
  import tb_vlc_ref_pkg::*;
  localparam int unsigned NUM_FE = 100, K = 128;

  logic clk = 0, rst_n = 0;
  logic fifo_empty, fifo_pop, tx_busy = 0;
  logic [6:0] fifo_addr, mem_addr, msg_addr;
  logic mem_read, msg_valid, busy;
  logic [K-1:0] mem_data, msg;
  logic [K-1:0] mem [NUM_FE];
  logic [6:0] q [$];
  logic [6:0] served [$];
  int checks = 0, failures = 0, busy_hold = 0;
  int pop_cycle = -100, cycle = 0;

  always #5 clk = ~clk;

  addr_pointer #(.NUM_FE(NUM_FE), .K(K)) dut (.*);

  // FIFO head, refreshed whenever the queue changes
  initial begin fifo_empty = 1'b1; fifo_addr = '0; end

  always_ff @(posedge clk) if (mem_read) mem_data <= mem[mem_addr];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Controller model: busy for a random time after each msg_valid.
  int busy_left = 0;
  always @(posedge clk) begin
    cycle++;
    if (rst_n) begin
      if (fifo_pop) begin
        checks++;
        if (tx_busy || fifo_empty || busy) begin failures++; $display("pop while busy/empty"); end
        if (tx_busy) busy_hold++;
        pop_cycle = cycle;
        served.push_back(q[0]);
        void'(q.pop_front());
        fifo_empty <= (q.size() == 0);
        fifo_addr  <= (q.size() == 0) ? 7'd0 : q[0];
      end
      if (mem_read) begin
        checks++;
        if (cycle != pop_cycle + 1 || mem_addr != served[$]) begin failures++; $display("bad read timing/address %0d %0d %0d %0d", cycle, pop_cycle, mem_addr, served[$]); end
      end
      if (msg_valid) begin
        checks++;
        if (cycle != pop_cycle + 3) begin failures++; $display("msg_valid at %0d, pop at %0d", cycle, pop_cycle); end
        checks++;
        if (msg !== mem[msg_addr] || msg_addr != served[$]) begin failures++; $display("bad message"); end
        busy_left = 1 + int'($urandom % 12);
        tx_busy <= 1'b1;
      end else if (busy_left > 0) begin
        busy_left--;
        if (busy_left == 0) tx_busy <= 1'b0;
      end
    end
  end

  initial begin
    int total = 0;
    for (int i = 0; i < int'(NUM_FE); i++) mem[i] = K'(rand_vec(K));
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      if ($urandom % 5 == 0) begin q.push_back(7'($urandom % NUM_FE)); total++; end
      fifo_empty = (q.size() == 0);
      fifo_addr  = (q.size() == 0) ? 7'd0 : q[0];
    end
    while (q.size() > 0 || busy) @(negedge clk);
    repeat (20) @(negedge clk);
    checks++;
    if (served.size() != total) begin failures++; $display("served %0d of %0d", served.size(), total); end
    checks++;
    if (busy_hold != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
