// tb_workload_kappa: the security-parameter sweep of the timing evaluation
// (kappa = 16 and 32 with a 64-bit signature; kappa = 64 is the default run
// by tb_safe_sip_top). Each configuration is enrolled and re-authenticated
// end to end and its cycle counts are printed next to the published
// authentication latencies of 96 and 160 cycles for comparison; the
// published numbers are not checked, since the hashing here is a one-round-
// per-cycle SHA-256 over the whole garbled value.
module tb_workload_kappa;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic f16, f32;
  int c16, c32, e16, e32;

  wl_kappa_run #(.W(64), .K(16)) r16 (.clk, .rst_n, .finished(f16), .checks(c16), .failures(e16));
  wl_kappa_run #(.W(64), .K(32)) r32 (.clk, .rst_n, .finished(f32), .checks(c32), .failures(e32));

  initial begin
    #20000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c16 + c32, e16 + e32 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (f16 && f32);
    $display("published latency for comparison: kappa=16 -> 96 cycles, kappa=32 -> 160 cycles");
    $display("TB_RESULT checks=%0d failures=%0d", c16 + c32, e16 + e32);
    $finish;
  end
endmodule
