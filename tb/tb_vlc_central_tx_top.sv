// tb_vlc_central_tx_top: end-to-end test of the centralized transmitter at
// reduced sizes (8 front-ends, 8-bit messages, length-16 Polar code, a
// 4-entry request FIFO, sr_clk = sys_clk / 8), once with Manchester and once
// with 4B6B line coding.  See tb_top_env for what is checked.
module tb_vlc_central_tx_top;
  int c_m, f_m, c_4, f_4;
  bit d_m, d_4;
  int checks, failures;

  tb_top_env #(.RLL(vlc_pkg::RLL_MANCHESTER)) env_m (.checks(c_m), .failures(f_m), .finished(d_m));
  tb_top_env #(.RLL(vlc_pkg::RLL_4B6B))       env_4 (.checks(c_4), .failures(f_4), .finished(d_4));

  initial begin
    #20ms;
    checks = c_m + c_4;
    failures = f_m + f_4 + 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (d_m && d_4);
    checks = c_m + c_4;
    failures = f_m + f_4;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
