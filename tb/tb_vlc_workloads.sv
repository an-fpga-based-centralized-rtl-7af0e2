// tb_vlc_workloads: the processing-time sweep of the evaluation (1 to 100
// beacons, message lengths 16, 32, 64 and 128 bits with code lengths twice
// as long, Manchester line code, 100 front-ends).  See tb_workload_env.
module tb_vlc_workloads;
  int c [4], f [4];
  bit d [4];

  tb_workload_env #(.K(16))  e16  (.checks(c[0]), .failures(f[0]), .finished(d[0]));
  tb_workload_env #(.K(32))  e32  (.checks(c[1]), .failures(f[1]), .finished(d[1]));
  tb_workload_env #(.K(64))  e64  (.checks(c[2]), .failures(f[2]), .finished(d[2]));
  tb_workload_env #(.K(128)) e128 (.checks(c[3]), .failures(f[3]), .finished(d[3]));

  function automatic void report(int extra);
    int checks, failures;
    checks = c[0] + c[1] + c[2] + c[3];
    failures = f[0] + f[1] + f[2] + f[3] + extra;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  endfunction

  initial begin
    #50ms;
    report(1);
    $finish;
  end

  initial begin
    wait (d[0] && d[1] && d[2] && d[3]);
    report(0);
    $finish;
  end
endmodule
