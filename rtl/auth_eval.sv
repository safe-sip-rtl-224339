// auth_eval: the evaluation step E = Eval(H) of the in-house chiplet.
//
// It decides which chiplets are authentic and whether the package boots.
// Each chiplet's attestation digest d_i = SHA-256(G(S_i)) is compared with
// a reference: before enrollment the digest the vendor supplied, after
// enrollment the copy held in OTP. A chiplet is enabled only when it
// answered in time and its digest matches; a mismatch disables that chiplet
// alone. After enrollment the package also needs the combined hash
// H = SHA-256(G(S_1)||...||G(S_N)) to equal the enrolled H. On a first boot
// where all chiplets pass, prog_req asks the in-house chiplet to store H and
// the digests in OTP.
//
// The comparisons follow the published flow (hash matching against
// vendor-provided values, then against OTP, disabling a mismatching
// chiplet); using per-chiplet digests to single out the bad chiplet is this
// design's reading. Timing: pulse start with all inputs valid; results are
// registered and done pulses on the next cycle.
module auth_eval
  import safe_sip_pkg::*;
#(
  parameter int unsigned NC = N_CHIPLETS
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          enrolled,        // OTP holds reference values
  input  digest_t       hash_h,          // H computed this boot
  input  digest_t       digest [NC],     // d_i received from chiplet i
  input  logic [NC-1:0] responsive,      // chiplet answered before timeout
  input  digest_t       vendor_digest [NC],
  input  digest_t       otp_h,
  input  digest_t       otp_digest [NC],
  output logic          done,
  output logic          auth,
  output logic [NC-1:0] chiplet_en,
  output logic          prog_req
);

  logic [NC-1:0] en_next;
  logic          all_ok;

  always_comb begin
    for (int i = 0; i < NC; i++)
      en_next[i] = responsive[i] &&
                   (enrolled ? (digest[i] == otp_digest[i])
                             : (digest[i] == vendor_digest[i]));
    all_ok = &en_next;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      done       <= 1'b0;
      auth       <= 1'b0;
      chiplet_en <= '0;
      prog_req    <= 1'b0;
    end else begin
      done    <= start;
      prog_req <= 1'b0;
      if (start) begin
        chiplet_en <= en_next;
        auth       <= all_ok && (!enrolled || (hash_h == otp_h));
        prog_req    <= all_ok && !enrolled;
      end
    end

endmodule
