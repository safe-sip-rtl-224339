// tb_safe_sip_top: end-to-end test of the whole package at the default
// sizes (W = 64, kappa = 64, four chiplets, no parameter overrides).
//
// Sequence: provision the garbling labels; first boot enrolls (vendor
// digests from the reference model) and programs H into OTP; power cycle
// and re-authenticate; swap chiplet 2's signature for a counterfeit (only
// chiplet 2 is disabled, the boot fails); hold chiplet 3 in reset (the
// boot times out on it); restore and boot again. Every boot result, H and
// the OTP copy are compared with the reference model, and each mechanism
// (provisioning, enrollment, re-authentication, counterfeit disable,
// timeout) is counted and must have happened. The boot length is checked
// against the cycle budget of the sequence.
module tb_safe_sip_top;
  import safe_sip_pkg::*;
  localparam int unsigned W = SIG_W, K = KAPPA, NC = N_CHIPLETS;
  localparam int unsigned G_W = W * K, RESP_W = G_W + DIGEST_W;
  typedef safe_sip_ref_pkg::safe_sip_ref #(W, K, NC) ref_t;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NC-1:0] chiplet_rst_n = '1, chiplet_en, responsive;
  logic boot_req = 0, provision = 0;
  logic [W-1:0] signature [NC], trng_r [NC];
  logic [K-2:0] trng_l0 [NC], trng_l1 [NC];
  digest_t vendor_digest [NC], hash_out, hash_otp;
  logic secure_boot, boot_done, boot_ok, timed_out, enrolled, otp_err;

  safe_sip_top dut (
    .clk, .rst_n, .chiplet_rst_n, .boot_req, .provision, .signature, .trng_r, .trng_l0,
    .trng_l1, .vendor_digest, .secure_boot, .boot_done, .boot_ok, .chiplet_en, .responsive,
    .timed_out, .hash_out, .hash_otp, .enrolled, .otp_err);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int n_provision = 0, n_enroll = 0, n_reauth_ok = 0, n_disable = 0, n_timeout = 0;

  // reference secrets and values
  logic [W-1:0] sig_m [NC], r_m [NC];
  logic [K-2:0] l0_m [NC], l1_m [NC];
  ref_t::garbled_t g_m [NC];
  digest_t d_m [NC], h_m;

  task automatic boot(input bit prov, output int len);
    @(negedge clk) begin boot_req = 1; provision = prov; end
    @(negedge clk) begin boot_req = 0; provision = 0; end
    len = 1;
    while (!boot_done && len < 100000) begin @(negedge clk); len++; end
    check(boot_done, "boot finished");
    @(negedge clk);
    check(!secure_boot, "secure_boot low after the boot");
  endtask

  task automatic refresh_model();
    for (int i = 0; i < NC; i++) begin
      g_m[i] = ref_t::garble(signature[i], r_m[i], l0_m[i], l1_m[i]);
      d_m[i] = ref_t::hash_g(g_m[i]);
    end
    h_m = ref_t::hash_all(g_m);
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int len, budget;
    for (int i = 0; i < NC; i++) begin
      signature[i] = {$urandom, $urandom};
      trng_r[i]  = {$urandom, $urandom};
      trng_l0[i] = {$urandom, $urandom};
      trng_l1[i] = {$urandom, $urandom};
      r_m[i] = trng_r[i]; l0_m[i] = trng_l0[i]; l1_m[i] = trng_l1[i];
      sig_m[i] = signature[i];
      vendor_digest[i] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!enrolled, "package starts unenrolled");

    // 1. vendors provision their labels
    boot(1, len);
    check(!boot_ok, "provisioning is not a boot");
    n_provision++;
    for (int i = 0; i < NC; i++) begin
      // the TRNG moves on; labels must stay
      trng_r[i] = ~trng_r[i]; trng_l0[i] = ~trng_l0[i]; trng_l1[i] = ~trng_l1[i];
    end
    refresh_model();
    for (int i = 0; i < NC; i++) vendor_digest[i] = d_m[i];

    // 2. first boot at the integrator: enrollment
    boot(0, len);
    check(boot_ok && chiplet_en == '1, "enrollment boot authenticates");
    check(enrolled && hash_otp == h_m && hash_out == h_m, "H computed and stored in OTP");
    // budget: WIR (4) + chiplet (3 + sha) + capture (1) + RESP_W + update (1)
    //         + eval start (1) + in-house (sha + 2 + NC + 1) + WIR (4) + finish
    budget = 4 + 3 + sha_cycles(G_W) + 1 + RESP_W + 1 + 1 + sha_cycles(NC * G_W) + 2 + NC + 1 + 4 + 1;
    check(len >= budget - 4 && len <= budget + 4,
          $sformatf("enrollment boot took %0d cycles, budget %0d", len, budget));
    $display("enrollment boot: %0d cycles", len);
    if (boot_ok && enrolled) n_enroll++;

    // 3. power cycle and secure boot again
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    boot(0, len);
    check(boot_ok && chiplet_en == '1 && hash_out == hash_otp, "re-authentication");
    check(!otp_err, "OTP not written again");
    $display("re-authentication boot: %0d cycles", len);
    if (boot_ok) n_reauth_ok++;

    // 4. counterfeit chiplet 2
    signature[2] = ~signature[2];
    boot(0, len);
    refresh_model();
    check(!boot_ok && chiplet_en == 4'b1011, $sformatf("counterfeit: chiplet_en %b", chiplet_en));
    check(hash_out == h_m && hash_out != hash_otp, "H of the counterfeit package differs");
    if (!boot_ok && !chiplet_en[2]) n_disable++;
    signature[2] = sig_m[2];

    // 5. chiplet 3 does not answer
    chiplet_rst_n[3] = 0;
    boot(0, len);
    check(timed_out && responsive == 4'b0111 && chiplet_en == 4'b0111 && !boot_ok,
          $sformatf("silent chiplet: responsive %b en %b", responsive, chiplet_en));
    if (timed_out) n_timeout++;
    chiplet_rst_n[3] = 1;

    // 6. all restored
    boot(0, len);
    refresh_model();
    check(boot_ok && chiplet_en == '1 && hash_out == h_m, "restored package authenticates");
    if (boot_ok) n_reauth_ok++;

    $display("mechanisms: provision=%0d enroll=%0d reauth_ok=%0d counterfeit_disable=%0d timeout=%0d",
             n_provision, n_enroll, n_reauth_ok, n_disable, n_timeout);
    check(n_provision > 0, "provisioning happened");
    check(n_enroll > 0, "enrollment happened");
    check(n_reauth_ok > 0, "re-authentication happened");
    check(n_disable > 0, "counterfeit disable happened");
    check(n_timeout > 0, "timeout happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
