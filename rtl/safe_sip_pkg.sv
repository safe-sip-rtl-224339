// safe_sip_pkg: constants and types shared by the SAFE-SiP chiplet
// authentication blocks.
//
// The default sizes are the main configuration evaluated for SAFE-SiP:
// a 64-bit chiplet signature (W), a 64-bit security parameter (kappa) and
// four vendor chiplets whose garbled signatures are hashed together
// (H = Hash(G(S1), G(S2), G(S3), G(S4))). The garbled signature is
// g = W * kappa bits wide.
//
// The IEEE 1500 wrapper instruction codes are this design's own choice:
// the standard fixes WS_BYPASS, the rest are private instructions that
// start authentication (AUTH) or draw fresh garbling labels from the
// chiplet's TRNG (REKEY, used once when the vendor enrolls the chiplet).
//
// The SHA-256 round constants and initial hash value are those of
// FIPS 180-4.
package safe_sip_pkg;

  parameter int unsigned SIG_W      = 64;  // signature width W
  parameter int unsigned KAPPA      = 64;  // security parameter kappa
  parameter int unsigned N_CHIPLETS = 4;   // garbled vendor chiplets
  parameter int unsigned WIR_W      = 3;   // wrapper instruction width
  parameter int unsigned DIGEST_W   = 256; // SHA-256 digest width

  typedef logic [DIGEST_W-1:0] digest_t;

  // Wrapper instructions held in the WIR.
  typedef enum logic [WIR_W-1:0] {
    WS_BYPASS = 3'b000,
    WS_AUTH   = 3'b001,
    WS_REKEY  = 3'b010
  } wir_instr_e;

  // Number of 512-bit blocks of a padded message of msg_bits bits.
  function automatic int unsigned sha_blocks(input int unsigned msg_bits);
    return (msg_bits + 65 + 511) / 512;
  endfunction

  // Clock cycles sha256_core needs from start to done: one load cycle,
  // 64 round cycles and one add cycle per block.
  function automatic int unsigned sha_cycles(input int unsigned msg_bits);
    return sha_blocks(msg_bits) * 66;
  endfunction

  localparam logic [31:0] SHA_H0 [8] = '{
    32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
    32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19
  };

  localparam logic [31:0] SHA_K [64] = '{
    32'h428a2f98, 32'h71374491, 32'hb5c0fbcf, 32'he9b5dba5,
    32'h3956c25b, 32'h59f111f1, 32'h923f82a4, 32'hab1c5ed5,
    32'hd807aa98, 32'h12835b01, 32'h243185be, 32'h550c7dc3,
    32'h72be5d74, 32'h80deb1fe, 32'h9bdc06a7, 32'hc19bf174,
    32'he49b69c1, 32'hefbe4786, 32'h0fc19dc6, 32'h240ca1cc,
    32'h2de92c6f, 32'h4a7484aa, 32'h5cb0a9dc, 32'h76f988da,
    32'h983e5152, 32'ha831c66d, 32'hb00327c8, 32'hbf597fc7,
    32'hc6e00bf3, 32'hd5a79147, 32'h06ca6351, 32'h14292967,
    32'h27b70a85, 32'h2e1b2138, 32'h4d2c6dfc, 32'h53380d13,
    32'h650a7354, 32'h766a0abb, 32'h81c2c92e, 32'h92722c85,
    32'ha2bfe8a1, 32'ha81a664b, 32'hc24b8b70, 32'hc76c51a3,
    32'hd192e819, 32'hd6990624, 32'hf40e3585, 32'h106aa070,
    32'h19a4c116, 32'h1e376c08, 32'h2748774c, 32'h34b0bcb5,
    32'h391c0cb3, 32'h4ed8aa4a, 32'h5b9cca4f, 32'h682e6ff3,
    32'h748f82ee, 32'h78a5636f, 32'h84c87814, 32'h8cc70208,
    32'h90befffa, 32'ha4506ceb, 32'hbef9a3f7, 32'hc67178f2
  };

endpackage
