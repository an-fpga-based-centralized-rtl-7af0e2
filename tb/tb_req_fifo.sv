// tb_req_fifo: random pushes and pops of 7-bit addresses on the 32-entry
// Requests FIFO against a queue model; checks the show-ahead data, count,
// empty and full, and that the FIFO fills to exactly 32 entries.
module tb_req_fifo;
  localparam int unsigned WIDTH = 7, DEPTH = 32;

  logic clk = 0, rst_n = 0, push = 0, pop = 0;
  logic [WIDTH-1:0] wr_data = '0, rd_data;
  logic empty, full;
  logic [5:0] count;
  logic [WIDTH-1:0] q [$];
  int checks = 0, failures = 0, fulls = 0;

  always #5 clk = ~clk;

  req_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    checks++;
    if (count != 6'(q.size()) || empty != (q.size() == 0) || full != (q.size() == DEPTH)) begin
      failures++; $display("status mismatch count=%0d model=%0d", count, q.size());
    end
    if (q.size() > 0) begin
      checks++;
      if (rd_data !== q[0]) begin failures++; $display("data mismatch"); end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); compare();
    // fill completely
    for (int i = 0; i < int'(DEPTH); i++) begin
      push = 1; wr_data = WIDTH'($urandom); q.push_back(wr_data);
      @(negedge clk); push = 0; compare();
    end
    if (full) fulls++;
    // drain completely
    while (q.size() > 0) begin
      pop = 1; @(negedge clk); pop = 0; void'(q.pop_front()); compare();
    end
    // random traffic, with different fill biases
    for (int t = 0; t < 6000; t++) begin
      int bias = (t / 1000) % 3;
      push = !full && ($urandom % 4 < 1 + bias);
      pop  = !empty && ($urandom % 4 < 3 - bias);
      wr_data = WIDTH'($urandom);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wr_data);
      @(negedge clk); push = 0; pop = 0;
      compare();
      if (full) fulls++;
    end
    checks++; if (fulls == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
