// tb_controller: drives the Controller with messages, transmitter done
// pulses and front-end busy flags.  Checks tx_start in the msg_valid cycle,
// tx_busy from then until the DE-MUX write, demux_we with the right address
// in the tx_done cycle when the target front-end is free, and a stall (no
// write, stalled high) for as long as the target is busy.
module tb_controller;
  localparam int unsigned NUM_FE = 100;

  logic clk = 0, rst_n = 0;
  logic msg_valid = 0, tx_done = 0;
  logic [6:0] msg_addr = '0, demux_sel;
  logic tx_busy, tx_start, demux_we, stalled;
  logic [NUM_FE-1:0] fe_busy = '0;
  int checks = 0, failures = 0, stalls = 0;

  always #5 clk = ~clk;

  controller #(.NUM_FE(NUM_FE)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!tx_busy && !demux_we && !tx_start, "idle after reset");
    for (int t = 0; t < 500; t++) begin
      logic [6:0] a;
      int run, hold;
      a = 7'($urandom % NUM_FE);
      run = 1 + int'($urandom % 12);
      hold = ($urandom % 3 == 0) ? 1 + int'($urandom % 6) : 0;
      fe_busy = '0;
      if (hold > 0) fe_busy[a] = 1'b1;
      else fe_busy[(a + 1) % NUM_FE] = 1'b1;   // a busy neighbour must not matter
      msg_valid = 1; msg_addr = a;
      #1 chk(tx_start, "start with msg_valid");
      @(negedge clk); msg_valid = 0; msg_addr = ~a;
      for (int c = 0; c < run; c++) begin
        chk(tx_busy && !tx_start && !demux_we, "busy while running");
        @(negedge clk);
      end
      tx_done = 1;
      #1 chk(demux_we == (hold == 0), "write on done when free");
      if (demux_we) chk(demux_sel == a, "demux address");
      @(negedge clk); tx_done = 0;
      if (hold > 0) begin
        stalls++;
        for (int c = 0; c < hold; c++) begin
          chk(stalled && tx_busy && !demux_we, "stall while target busy");
          @(negedge clk);
        end
        fe_busy[a] = 1'b0;
        #1 chk(demux_we && demux_sel == a, "write after stall");
        @(negedge clk);
      end
      chk(!tx_busy && !stalled, "idle after write");
      repeat ($urandom % 3) @(negedge clk);
    end
    chk(stalls > 0, "stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
