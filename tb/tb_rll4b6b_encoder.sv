// tb_rll4b6b_encoder: every nibble value in every position and random code
// words against the reference 4B6B table; each 6-bit group must hold three
// ones.
module tb_rll4b6b_encoder;
  import tb_vlc_ref_pkg::*;
  localparam int unsigned N = 256;
  logic [N-1:0] din;
  logic [N/4*6-1:0] dout;
  int checks = 0, failures = 0;

  rll4b6b_encoder #(.N(N)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input logic [N-1:0] v);
    bigvec_t e;
    din = v;
    #1;
    e = ref_4b6b(bigvec_t'(din), N);
    checks++;
    if (dout !== e[N/4*6-1:0]) begin failures++; $display("mismatch %h", din); end
    for (int j = 0; j < int'(N / 4); j++) begin
      checks++;
      if ($countones(dout[6*j +: 6]) != 3) failures++;
    end
  endtask

  initial begin
    for (int nib = 0; nib < 16; nib++) one({(N/4){4'(nib)}});
    for (int t = 0; t < 200; t++) one(N'(rand_vec(N)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
