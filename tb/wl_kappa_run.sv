// wl_kappa_run: runs one package configuration (signature width W,
// security parameter K, four chiplets) through provisioning, enrollment and
// re-authentication, checks the results against the reference model and
// reports the cycle counts. Used by tb_workload_kappa to sweep kappa.
module wl_kappa_run #(
  parameter int unsigned W = 64,
  parameter int unsigned K = 64
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures
);
  import safe_sip_pkg::*;
  localparam int unsigned NC = 4;
  typedef safe_sip_ref_pkg::safe_sip_ref #(W, K, NC) ref_t;

  logic [NC-1:0] chiplet_en, responsive;
  logic boot_req = 0, provision = 0;
  logic [W-1:0] signature [NC], trng_r [NC];
  logic [K-2:0] trng_l0 [NC], trng_l1 [NC];
  digest_t vendor_digest [NC], hash_out, hash_otp;
  logic secure_boot, boot_done, boot_ok, timed_out, enrolled, otp_err;

  safe_sip_top #(.W(W), .K(K), .NC(NC)) dut (
    .clk, .rst_n, .chiplet_rst_n('1), .boot_req, .provision, .signature, .trng_r, .trng_l0,
    .trng_l1, .vendor_digest, .secure_boot, .boot_done, .boot_ok, .chiplet_en, .responsive,
    .timed_out, .hash_out, .hash_otp, .enrolled, .otp_err);

  // cycles from the WS_AUTH update until a chiplet's response is ready
  int unsigned cyc = 0, t_auth = 0, chiplet_lat = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.select_wir && dut.update_wr && dut.u_boot.instr == WS_AUTH) t_auth <= cyc;
    if (dut.g_chiplet[0].u_chiplet.auth_ready && chiplet_lat == 0 && t_auth != 0)
      chiplet_lat <= cyc - t_auth;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL (kappa=%0d): %s", K, what); end
  endtask

  task automatic boot(input bit prov, output int len);
    @(negedge clk) begin boot_req = 1; provision = prov; end
    @(negedge clk) begin boot_req = 0; provision = 0; end
    len = 1;
    while (!boot_done && len < 200000) begin @(negedge clk); len++; end
  endtask

  initial begin
    int len;
    ref_t::garbled_t g [NC];
    checks = 0; failures = 0; finished = 0;
    for (int i = 0; i < NC; i++) begin
      for (int b = 0; b < W; b += 32) begin
        signature[i][b +: 32] = $urandom;
        trng_r[i][b +: 32] = $urandom;
      end
      for (int b = 0; b < K - 1; b++) begin
        trng_l0[i][b] = 1'($urandom);
        trng_l1[i][b] = 1'($urandom);
      end
      g[i] = ref_t::garble(signature[i], trng_r[i], trng_l0[i], trng_l1[i]);
      vendor_digest[i] = ref_t::hash_g(g[i]);
    end
    @(posedge rst_n);
    boot(1, len);
    boot(0, len);
    check(boot_ok && enrolled && hash_otp == ref_t::hash_all(g), "enrollment");
    $display("kappa=%0d W=%0d: g=%0d bits/chiplet, chiplet garble+hash %0d cycles, full enrollment boot %0d cycles",
             K, W, W * K, chiplet_lat, len);
    boot(0, len);
    check(boot_ok && chiplet_en == '1, "re-authentication");
    $display("kappa=%0d W=%0d: re-authentication boot %0d cycles", K, W, len);
    finished = 1;
  end
endmodule
