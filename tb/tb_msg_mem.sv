// tb_msg_mem: random writes and reads on both ports of the 100 x 128 message
// memory against an array model, with the one-cycle read latency and the
// hold of the read data between reads.
module tb_msg_mem;
  import tb_vlc_ref_pkg::*;
  localparam int unsigned DEPTH = 100, WIDTH = 128;

  logic clk = 0;
  logic a_write = 0, a_read = 0, b_read = 0;
  logic [6:0] a_addr = '0, b_addr = '0;
  logic [WIDTH-1:0] a_wdata = '0, a_rdata, b_rdata;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  msg_mem #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] exp_a, exp_b;
    // fill every word through port A
    for (int i = 0; i < int'(DEPTH); i++) begin
      @(negedge clk);
      a_write = 1; a_addr = 7'(i); a_wdata = WIDTH'(rand_vec(WIDTH)); model[i] = a_wdata;
    end
    @(negedge clk); a_write = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      a_write = ($urandom % 3 == 0);
      a_read  = !a_write && ($urandom % 2 == 0);
      b_read  = ($urandom % 2 == 0);
      a_addr  = 7'($urandom % DEPTH);
      b_addr  = 7'($urandom % DEPTH);
      a_wdata = WIDTH'(rand_vec(WIDTH));
      exp_a = model[a_addr];
      exp_b = model[b_addr];   // old data on a same-edge write
      if (a_write) model[a_addr] = a_wdata;
      @(negedge clk);
      if (a_read) begin checks++; if (a_rdata !== exp_a) begin failures++; $display("A mismatch"); end end
      if (b_read) begin checks++; if (b_rdata !== exp_b) begin failures++; $display("B mismatch"); end end
      a_write = 0; a_read = 0; b_read = 0;
      b_addr = 7'($urandom % DEPTH);
    end
    // read data holds while no read is issued
    @(negedge clk); b_read = 1; b_addr = 7'd5; exp_b = model[5];
    @(negedge clk); b_read = 0; b_addr = 7'd9;
    repeat (3) @(negedge clk);
    checks++; if (b_rdata !== exp_b) begin failures++; $display("hold failed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
