// safe_sip_top: a System-in-Package with SAFE-SiP authentication: NC vendor
// chiplets with garbled signatures, the integrator's in-house chiplet that
// evaluates them, and the secure boot controller.
//
// Every vendor chiplet garbles its signature and hashes the result; the
// secure boot collects {G(S_i), SHA-256(G(S_i))} from all chiplets in
// parallel through their IEEE 1500 wrappers and the interposer; the
// in-house chiplet computes H = SHA-256(G(S_1)||...||G(S_NC)), compares with
// the enrolled values and enables only the authentic chiplets. The first
// successful boot enrolls: it checks the chiplet digests against those the
// vendors supplied (vendor_digest) and stores H and the digests in OTP.
// Later boots compare against OTP. The structure (garbled chiplets with
// WBR, garbling circuit, SHA; in-house chiplet with SHA and Eval; secure
// boot driving both) is the published one; see the modules for the choices
// made here.
//
// The vendors' signature cores and the chiplets' TRNGs are outside this
// design: their outputs are the signature and trng_* ports. The
// interposer is the wiring between chiplet wso and in-house wsi.
// chiplet_rst_n holds a single chiplet in reset (for example an unpowered or
// absent die); the secure boot then times out on it and disables it.
//
// Timing: pulse boot_req (with provision high to draw new garbling labels
// instead); boot_done pulses at the end, with boot_ok, chiplet_en,
// hash_out and hash_otp valid from then on until the next boot_req.
// secure_boot is high for the whole sequence.
module safe_sip_top
  import safe_sip_pkg::*;
#(
  parameter int unsigned W       = SIG_W,
  parameter int unsigned K       = KAPPA,
  parameter int unsigned NC      = N_CHIPLETS,
  parameter int unsigned TIMEOUT = 2 * sha_cycles(W * K) + 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NC-1:0] chiplet_rst_n,
  input  logic          boot_req,
  input  logic          provision,
  // from each chiplet's signature core and TRNG
  input  logic [W-1:0]  signature [NC],
  input  logic [W-1:0]  trng_r    [NC],
  input  logic [K-2:0]  trng_l0   [NC],
  input  logic [K-2:0]  trng_l1   [NC],
  // vendor-supplied attestation digests, used for enrollment
  input  digest_t       vendor_digest [NC],
  // status
  output logic          secure_boot,
  output logic          boot_done,
  output logic          boot_ok,
  output logic [NC-1:0] chiplet_en,
  output logic [NC-1:0] responsive,
  output logic          timed_out,
  output digest_t       hash_out,
  output digest_t       hash_otp,
  output logic          enrolled,
  output logic          otp_err
);

  localparam int unsigned RESP_W = W * K + DIGEST_W;

  logic          select_wir, shift_wr, capture_wr, update_wr, wir_wsi, select_wbr;
  logic          eval_start, eval_done, eval_auth;
  logic [NC-1:0] ready, link;

  secure_boot_ctrl #(.NC(NC), .RESP_W(RESP_W), .TIMEOUT(TIMEOUT)) u_boot (
    .clk, .rst_n, .boot_req, .provision,
    .chiplet_ready(ready), .select_wir, .shift_wr, .capture_wr, .update_wr,
    .wir_wsi, .select_wbr, .eval_start, .eval_done, .eval_auth, .responsive,
    .secure_boot, .boot_done, .boot_ok, .timed_out
  );

  for (genvar i = 0; i < NC; i++) begin : g_chiplet
    garbled_chiplet #(.W(W), .K(K)) u_chiplet (
      .clk, .rst_n(rst_n && chiplet_rst_n[i]),
      .signature(signature[i]), .trng_r(trng_r[i]),
      .trng_l0(trng_l0[i]), .trng_l1(trng_l1[i]),
      .select_wir, .shift_wr, .capture_wr, .update_wr,
      .wsi(wir_wsi), .wso(link[i]), .auth_ready(ready[i])
    );
  end

  inhouse_chiplet #(.W(W), .K(K), .NC(NC)) u_inhouse (
    .clk, .rst_n, .wsi(link), .select_wbr, .shift_wr, .update_wr,
    .eval_start, .responsive, .vendor_digest,
    .eval_done, .auth(eval_auth), .chiplet_en, .hash_out, .hash_otp,
    .enrolled, .otp_err
  );

endmodule
