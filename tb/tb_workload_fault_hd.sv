// tb_workload_fault_hd: the fault-injection sweep of the security
// evaluation. The published figure plots Hamming distance under faults for
// kappa = 8, 16, 32, 64 at a 64-bit signature and for signature widths
// 64, 128, 256, 512 at kappa = 64. This testbench runs the vendor data path
// (garbling + SHA-256) at each of those seven sizes with wl_hd_run, injects
// single-bit faults into the signature and into the garbled value, and
// prints the mean Hamming distances of the garbled value and of the digest.
//
// The published experiment does not define its fault model, so the
// published percentages (25.59 % .. 49.41 %) are printed for comparison only
// and not checked. What is checked: every fault changes the digest, the
// digest distance is near 50 %, and the golden values match the reference
// model.
module tb_workload_fault_hd;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int N = 7;
  logic fin [N];
  int   chk [N], err [N], hg [N], hs [N], hf [N];

  wl_hd_run #(.W(64),  .K(8))  k8   (.clk, .rst_n, .finished(fin[0]), .checks(chk[0]), .failures(err[0]), .hd_g_bp(hg[0]), .hd_sig_bp(hs[0]), .hd_gf_bp(hf[0]));
  wl_hd_run #(.W(64),  .K(16)) k16  (.clk, .rst_n, .finished(fin[1]), .checks(chk[1]), .failures(err[1]), .hd_g_bp(hg[1]), .hd_sig_bp(hs[1]), .hd_gf_bp(hf[1]));
  wl_hd_run #(.W(64),  .K(32)) k32  (.clk, .rst_n, .finished(fin[2]), .checks(chk[2]), .failures(err[2]), .hd_g_bp(hg[2]), .hd_sig_bp(hs[2]), .hd_gf_bp(hf[2]));
  wl_hd_run #(.W(64),  .K(64)) k64  (.clk, .rst_n, .finished(fin[3]), .checks(chk[3]), .failures(err[3]), .hd_g_bp(hg[3]), .hd_sig_bp(hs[3]), .hd_gf_bp(hf[3]));
  wl_hd_run #(.W(128), .K(64)) w128 (.clk, .rst_n, .finished(fin[4]), .checks(chk[4]), .failures(err[4]), .hd_g_bp(hg[4]), .hd_sig_bp(hs[4]), .hd_gf_bp(hf[4]));
  wl_hd_run #(.W(256), .K(64)) w256 (.clk, .rst_n, .finished(fin[5]), .checks(chk[5]), .failures(err[5]), .hd_g_bp(hg[5]), .hd_sig_bp(hs[5]), .hd_gf_bp(hf[5]));
  wl_hd_run #(.W(512), .K(64)) w512 (.clk, .rst_n, .finished(fin[6]), .checks(chk[6]), .failures(err[6]), .hd_g_bp(hg[6]), .hd_sig_bp(hs[6]), .hd_gf_bp(hf[6]));

  function automatic bit all_done();
    foreach (fin[i]) if (fin[i] !== 1'b1) return 0;
    return 1;
  endfunction

  function automatic int sum(input int a [N]);
    int s = 0;
    foreach (a[i]) s += a[i];
    return s;
  endfunction

  initial begin
    #50000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", sum(chk), sum(err) + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!all_done()) @(negedge clk);
    $display("published HD for comparison: kappa 8/16/32/64 at W=64 -> 25.59/37.11/42.29/46.92 %%;");
    $display("  W 64/128/256/512 at kappa=64 -> 44.09/46.92/47.68/49.41 %%");
    $display("TB_RESULT checks=%0d failures=%0d", sum(chk), sum(err));
    $finish;
  end
endmodule
