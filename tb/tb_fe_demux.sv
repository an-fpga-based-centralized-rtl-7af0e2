// tb_fe_demux: every address with we high and low; the enable vector must
// be one-hot at the addressed front-end, or all zero.
module tb_fe_demux;
  localparam int unsigned NUM_FE = 100;
  logic we;
  logic [6:0] sel;
  logic [NUM_FE-1:0] we_vec;
  int checks = 0, failures = 0;

  fe_demux #(.NUM_FE(NUM_FE)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 128; a++) begin
      for (int w = 0; w < 2; w++) begin
        logic [NUM_FE-1:0] exp;
        we = w[0]; sel = 7'(a);
        exp = '0;
        if (w == 1 && a < int'(NUM_FE)) exp[a] = 1'b1;
        #1;
        checks++;
        if (we_vec !== exp) begin failures++; $display("mismatch at %0d", a); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
