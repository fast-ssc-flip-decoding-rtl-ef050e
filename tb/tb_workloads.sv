// tb_workloads: the configurations the (512,128) code is evaluated with,
// each on its own decoder instance, run side by side:
//   Tmax = 8,  s = 0.5, SPC nodes       (the default configuration)
//   Tmax = 16, s = 0.5, SPC nodes
//   Tmax = 8,  s = 1,   SPC nodes
//   Tmax = 8,  no SPC nodes (SPC codes split into repetition + rate-1)
// Every frame is checked against the behavioural decoder; frame-error
// counts and average execution times are printed per Eb/N0 point.
module tb_workloads;
  logic fin [4];
  int   chk [4], fail [4];

  fssc_harness #(.T_MAX(8),  .S_SHIFT(1), .USE_SPC(1), .FRAMES(60), .NAME("T=8 s=0.5"))  h0 (fin[0], chk[0], fail[0]);
  fssc_harness #(.T_MAX(16), .S_SHIFT(1), .USE_SPC(1), .FRAMES(60), .NAME("T=16 s=0.5")) h1 (fin[1], chk[1], fail[1]);
  fssc_harness #(.T_MAX(8),  .S_SHIFT(0), .USE_SPC(1), .FRAMES(60), .NAME("T=8 s=1"))    h2 (fin[2], chk[2], fail[2]);
  fssc_harness #(.T_MAX(8),  .S_SHIFT(1), .USE_SPC(0), .FRAMES(60), .NAME("T=8 no SPC")) h3 (fin[3], chk[3], fail[3]);

  int checks, failures;

  initial begin
    #20ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", chk[0] + chk[1] + chk[2] + chk[3],
             fail[0] + fail[1] + fail[2] + fail[3] + 1);
    $finish;
  end

  initial begin
    #1;
    wait (fin[0] && fin[1] && fin[2] && fin[3]);
    checks = chk[0] + chk[1] + chk[2] + chk[3];
    failures = fail[0] + fail[1] + fail[2] + fail[3];
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
