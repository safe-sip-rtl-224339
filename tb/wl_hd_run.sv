// wl_hd_run: fault-sensitivity measurement for one size (signature width W,
// security parameter K), used by tb_workload_fault_hd.
//
// One vendor data path (garbling_circuit followed by sha256_core over the
// W*K garbled bits) is run TRIALS times. Each trial computes the golden
// garbled value G and digest D for a random signature, and then two faulty
// runs with the same labels:
//   * a single signature bit flipped before garbling (a glitch on the
//     signature path), giving G' and D';
//   * a single bit of G flipped on its way into the hash, giving D''.
// It checks G and D against the reference model, that the flipped signature
// bit changes exactly one label (by 1 + popcount(L0 ^ L1) bits), and that
// both faults change the digest. It reports the mean Hamming distance,
// in hundredths of a percent, of G' from G (over all g bits) and of D' and
// D'' from D (over 256 bits).
module wl_hd_run #(
  parameter int unsigned W      = 64,
  parameter int unsigned K      = 64,
  parameter int unsigned TRIALS = 8
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   hd_g_bp,    // mean HD(G, G') in 0.01 %
  output int   hd_sig_bp,  // mean HD(D, D') in 0.01 %
  output int   hd_gf_bp    // mean HD(D, D'') in 0.01 %
);
  import safe_sip_pkg::*;
  typedef safe_sip_ref_pkg::safe_sip_ref #(W, K, 1) ref_t;
  localparam int unsigned G_W = W * K;

  logic          rekey = 0, g_start = 0, h_start = 0;
  logic [W-1:0]  sig, trng_r;
  logic [K-2:0]  trng_l0, trng_l1;
  logic          g_done, h_busy, h_done;
  logic [G_W-1:0] garbled, h_msg;
  digest_t       digest;

  garbling_circuit #(.W(W), .K(K)) u_gc (
    .clk, .rst_n, .rekey, .trng_r, .trng_l0, .trng_l1, .start(g_start), .sig,
    .done(g_done), .garbled);

  sha256_core #(.MSG_BITS(G_W)) u_sha (
    .clk, .rst_n, .start(h_start), .msg(h_msg), .busy(h_busy), .done(h_done), .digest);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL (W=%0d kappa=%0d): %s", W, K, what); end
  endtask

  task automatic garble(input logic [W-1:0] s, output logic [G_W-1:0] g);
    @(negedge clk) begin sig = s; g_start = 1; end
    @(negedge clk) g_start = 0;
    g = garbled;
  endtask

  task automatic hash(input logic [G_W-1:0] m, output digest_t d);
    @(negedge clk) begin h_msg = m; h_start = 1; end
    @(negedge clk) h_start = 0;
    while (!h_done) @(negedge clk);
    d = digest;
  endtask

  initial begin
    logic [G_W-1:0] g0, g1, flip;
    digest_t d0, d1, d2;
    longint sum_g = 0, sum_s = 0, sum_f = 0;
    checks = 0; failures = 0; finished = 0;
    hd_g_bp = 0; hd_sig_bp = 0; hd_gf_bp = 0;
    sig = '0; h_msg = '0;
    for (int b = 0; b < W; b++) trng_r[b] = 1'($urandom);
    for (int b = 0; b < K - 1; b++) begin
      trng_l0[b] = 1'($urandom);
      trng_l1[b] = 1'($urandom);
    end
    // the two labels must differ for a 0 and a 1 to be told apart at all
    if (trng_l0 == trng_l1) trng_l1[0] = ~trng_l1[0];
    @(posedge rst_n);
    @(negedge clk) rekey = 1;
    @(negedge clk) rekey = 0;
    for (int t = 0; t < TRIALS; t++) begin
      logic [W-1:0] s;
      int unsigned j, k;
      for (int b = 0; b < W; b++) s[b] = 1'($urandom);
      j = $urandom_range(W - 1);
      k = $urandom_range(G_W - 1);
      garble(s, g0);
      check(g0 == ref_t::garble(s, trng_r, trng_l0, trng_l1), "golden garbled value");
      hash(g0, d0);
      check(d0 == ref_t::hash_g(g0), "golden digest");
      // fault 1: signature bit j flipped
      garble(s ^ (W'(1) << j), g1);
      check($countones(g0 ^ g1) == 1 + $countones(trng_l0 ^ trng_l1),
            "signature fault changes one label");
      check((g0 ^ g1) >> (j * K) < (G_W'(1) << K), "signature fault stays in its label");
      hash(g1, d1);
      check(d1 != d0, "signature fault detected by the digest");
      // fault 2: garbled bit k flipped between garbling and hashing
      flip = G_W'(1) << k;
      hash(g0 ^ flip, d2);
      check(d2 != d0, "garbled-value fault detected by the digest");
      sum_g += $countones(g0 ^ g1);
      sum_s += $countones(d0 ^ d1);
      sum_f += $countones(d0 ^ d2);
    end
    hd_g_bp   = int'(sum_g * 10000 / (longint'(TRIALS) * G_W));
    hd_sig_bp = int'(sum_s * 10000 / (longint'(TRIALS) * 256));
    hd_gf_bp  = int'(sum_f * 10000 / (longint'(TRIALS) * 256));
    // a good hash moves about half of the digest bits
    check(hd_sig_bp > 4000 && hd_sig_bp < 6000, "digest HD near 50% (signature fault)");
    check(hd_gf_bp > 4000 && hd_gf_bp < 6000, "digest HD near 50% (garbled fault)");
    $display("W=%0d kappa=%0d g=%0d: HD(G) %0d.%02d%%  HD(digest, signature fault) %0d.%02d%%  HD(digest, G fault) %0d.%02d%%",
             W, K, G_W, hd_g_bp / 100, hd_g_bp % 100, hd_sig_bp / 100, hd_sig_bp % 100,
             hd_gf_bp / 100, hd_gf_bp % 100);
    finished = 1;
  end
endmodule
