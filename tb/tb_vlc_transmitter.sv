// tb_vlc_transmitter: both transmitter variants (Polar + Manchester and
// Polar + 4B6B) at K=128, N=256 with random messages against the reference
// model, and the start-to-done latency of log2(N)+2 = 10 cycles.
module tb_vlc_transmitter;
  import tb_vlc_ref_pkg::*;
  localparam int unsigned K = 128, N = 256;
  localparam int unsigned FM = 2 * N, F4 = N / 4 * 6;

  logic clk = 0, rst_n = 0, start = 0;
  logic [K-1:0] msg = '0;
  logic busy_m, done_m, busy_4, done_4;
  logic [FM-1:0] frame_m;
  logic [F4-1:0] frame_4;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  vlc_transmitter #(.K(K), .N(N), .RLL(vlc_pkg::RLL_MANCHESTER)) dut_m (
    .clk, .rst_n, .start, .msg, .busy(busy_m), .done(done_m), .frame(frame_m));
  vlc_transmitter #(.K(K), .N(N), .RLL(vlc_pkg::RLL_4B6B)) dut_4 (
    .clk, .rst_n, .start, .msg, .busy(busy_4), .done(done_4), .frame(frame_4));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      bigvec_t m, em, e4;
      int cyc;
      m = rand_vec(K);
      em = ref_frame(m, N, K, 1'b0);
      e4 = ref_frame(m, N, K, 1'b1);
      @(negedge clk); msg = m[K-1:0]; start = 1;
      @(negedge clk); start = 0; msg = '0; cyc = 1;
      while (!done_m) begin @(negedge clk); cyc++; end
      checks++; if (cyc != 10) begin failures++; $display("latency %0d", cyc); end
      checks++; if (!done_4) failures++;
      checks++; if (frame_m !== em[FM-1:0]) begin failures++; $display("manchester mismatch"); end
      checks++; if (frame_4 !== e4[F4-1:0]) begin failures++; $display("4b6b mismatch"); end
      @(negedge clk);
      checks++; if (done_m || busy_m) failures++;
      checks++; if (frame_m !== em[FM-1:0]) failures++;  // holds
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
