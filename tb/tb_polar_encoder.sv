// tb_polar_encoder: random messages through the K=128, N=256 Polar encoder,
// compared with the loop-form reference; checks done comes log2(N)+1 cycles
// after start, plus the all-zero and single-bit messages.
module tb_polar_encoder;
  import tb_vlc_ref_pkg::*;
  localparam int unsigned K = 128, N = 256;

  logic clk = 0, rst_n = 0, start = 0;
  logic [K-1:0] msg = '0;
  logic busy, done;
  logic [N-1:0] cw;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  polar_encoder #(.K(K), .N(N)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_one(input logic [K-1:0] m);
    bigvec_t exp;
    int cyc = 0;
    exp = ref_polar(bigvec_t'(m), N, K);
    @(negedge clk); msg = m; start = 1;
    @(negedge clk); start = 0; msg = ~m;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 9) begin failures++; $display("latency %0d, expected 9", cyc); end
    checks++;
    if (cw !== exp[N-1:0]) begin failures++; $display("cw mismatch msg=%h", m); end
    @(negedge clk);
    checks++;
    if (busy || done) begin failures++; $display("busy/done not cleared"); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_one('0);
    for (int b = 0; b < 8; b++) run_one(K'(1) << (b * 16 + 3));
    for (int t = 0; t < 200; t++) run_one(K'(rand_vec(K)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
