// tb_fe_reg: writes frames into the buffer register and plays the shift
// register side of the toggle handshake.  Checks the stored frame, that each
// write flips req_tgl, that busy rises with the write and falls exactly two
// sys_clk edges after the acknowledge toggle arrives.
module tb_fe_reg;
  import tb_vlc_ref_pkg::*;
  localparam int unsigned W = 512;

  logic clk = 0, rst_n = 0, we = 0, ack_tgl = 0;
  logic [W-1:0] din = '0, dout;
  logic req_tgl, busy;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fe_reg #(.W(W)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (busy || req_tgl) failures++;
    for (int t = 0; t < 200; t++) begin
      logic [W-1:0] f;
      logic old_tgl;
      int wait_c;
      f = W'(rand_vec(W));
      old_tgl = req_tgl;
      we = 1; din = f;
      @(negedge clk); we = 0; din = ~f;
      checks++; if (dout !== f) begin failures++; $display("frame not stored"); end
      checks++; if (req_tgl == old_tgl) begin failures++; $display("no toggle"); end
      checks++; if (!busy) begin failures++; $display("not busy after write"); end
      wait_c = int'($urandom % 20);
      repeat (wait_c) begin
        @(negedge clk);
        checks++; if (!busy || dout !== f) failures++;
      end
      ack_tgl = req_tgl;
      @(negedge clk);
      checks++; if (!busy) begin failures++; $display("busy dropped too early"); end
      @(negedge clk);
      checks++; if (busy) begin failures++; $display("busy did not drop"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
