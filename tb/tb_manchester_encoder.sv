// tb_manchester_encoder: random code words against the reference mapping
// 1 -> "10", 0 -> "01" (first line bit at the lower index).
module tb_manchester_encoder;
  import tb_vlc_ref_pkg::*;
  localparam int unsigned N = 256;
  logic [N-1:0] din;
  logic [2*N-1:0] dout;
  int checks = 0, failures = 0;

  manchester_encoder #(.N(N)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      bigvec_t v, e;
      v = (t == 0) ? '0 : (t == 1) ? {4096{1'b1}} : rand_vec(N);
      din = v[N-1:0];
      #1;
      e = ref_manchester(bigvec_t'(din), N);
      checks++;
      if (dout !== e[2*N-1:0]) begin failures++; $display("mismatch %h", din); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
