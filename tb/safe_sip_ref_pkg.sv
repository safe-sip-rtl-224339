// safe_sip_ref_pkg: reference model of the SAFE-SiP data path for the
// testbenches, written directly from the definitions: the garbled label of
// bit i is r0^i||L0 for a 0 and ~r0^i||L1 for a 1 (label i in bits
// [i*K +: K]), and the hashes are SHA-256 from sha256_ref_pkg over the
// big-endian byte string of a bit vector (its length a multiple of 8).
package safe_sip_ref_pkg;

class safe_sip_ref #(int unsigned W = 64, int unsigned K = 64, int unsigned NC = 4);

  typedef logic [W*K-1:0]  garbled_t;
  typedef logic [255:0]    dig_t;

  static function garbled_t garble(input logic [W-1:0] s, input logic [W-1:0] r,
                                   input logic [K-2:0] l0, input logic [K-2:0] l1);
    garbled_t g;
    for (int i = 0; i < W; i++) g[i*K +: K] = s[i] ? {~r[i], l1} : {r[i], l0};
    return g;
  endfunction

  static function dig_t hash_g(input garbled_t g);
    sha256_ref_pkg::bytes_t q;
    for (int i = W*K/8 - 1; i >= 0; i--) q.push_back(g[8*i +: 8]);
    return sha256_ref_pkg::sha256(q);
  endfunction

  // H over G(S_1) || ... || G(S_NC), chiplet 0 first
  static function dig_t hash_all(input garbled_t g [NC]);
    sha256_ref_pkg::bytes_t q;
    for (int c = 0; c < NC; c++)
      for (int i = W*K/8 - 1; i >= 0; i--) q.push_back(g[c][8*i +: 8]);
    return sha256_ref_pkg::sha256(q);
  endfunction

endclass

endpackage
