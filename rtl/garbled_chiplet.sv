// garbled_chiplet: the authentication logic a vendor adds to its chiplet.
//
// The vendor's own signature (watermark) circuit supplies the W-bit
// signature S. On the WS_AUTH instruction the chiplet garbles S with labels
// drawn from its TRNG, hashes the garbled value with SHA-256 for attestation,
// and raises auth_ready. The secure boot then captures {G(S), SHA-256(G(S))}
// into the wrapper boundary register and shifts it out on wso over the
// interposer. S itself never leaves the chiplet. The WS_REKEY instruction
// makes the garbling circuit take new labels from the TRNG (done once, when
// the vendor enrolls the chiplet). Signature core -> garbling circuit ->
// SHA -> WBR is the chain of the published framework; the instruction
// codes, the serial transport and the ready handshake are this design's.
//
// Interface: one IEEE 1500 serial port (wsi/wso) with the wrapper controls
// select_wir, shift_wr, capture_wr and update_wr, sampled on the rising
// edge of clk. wso carries the WIR when select_wir is high, otherwise the
// WBR under WS_AUTH or a one-bit bypass register.
//
// Timing: auth_ready rises 3 + sha_cycles(W*K) cycles after the clock edge
// of the WIR update that loads WS_AUTH (one cycle to decode, one to garble,
// the hash, one to register ready) and drops one cycle after the next
// instruction update. WS_REKEY samples the TRNG on the edge after its
// update. The WBR is RESP_W = W*K + 256
// bits long, so reading the response takes RESP_W shift cycles.
// The WBR's parallel output (cto) is left open: it carries only the
// response and drives no functional pins here. The assertion at the end is
// disabled while rst_n is low, so a lint tool also sees rst_n used as a
// synchronous signal; the flops themselves reset asynchronously.
module garbled_chiplet
  import safe_sip_pkg::*;
#(
  parameter int unsigned W = SIG_W,
  parameter int unsigned K = KAPPA,
  localparam int unsigned RESP_W = W * K + DIGEST_W
) (
  input  logic         clk,
  input  logic         rst_n,
  // from the vendor's signature core and the chiplet's TRNG
  input  logic [W-1:0] signature,
  input  logic [W-1:0] trng_r,
  input  logic [K-2:0] trng_l0,
  input  logic [K-2:0] trng_l1,
  // IEEE 1500 wrapper port
  input  logic         select_wir,
  input  logic         shift_wr,
  input  logic         capture_wr,
  input  logic         update_wr,
  input  logic         wsi,
  output logic         wso,
  // handshake to the secure boot
  output logic         auth_ready
);

  wir_instr_e instr;
  logic       new_instr, wir_wso;

  ieee1500_wir u_wir (
    .clk, .rst_n, .select_wir, .shift_wr, .capture_wr, .update_wr,
    .wsi, .wso(wir_wso), .instr, .new_instr
  );

  logic           g_start, g_done, h_done, h_busy;
  logic [W*K-1:0] garbled;
  digest_t        digest;

  assign g_start = new_instr && (instr == WS_AUTH);

  garbling_circuit #(.W(W), .K(K)) u_garble (
    .clk, .rst_n,
    .rekey(new_instr && (instr == WS_REKEY)),
    .trng_r, .trng_l0, .trng_l1,
    .start(g_start), .sig(signature), .done(g_done), .garbled
  );

  sha256_core #(.MSG_BITS(W * K)) u_sha (
    .clk, .rst_n, .start(g_done), .msg(garbled),
    .busy(h_busy), .done(h_done), .digest
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)         auth_ready <= 1'b0;
    else if (new_instr) auth_ready <= 1'b0;
    else if (h_done)    auth_ready <= 1'b1;

  logic wbr_sel, wbr_wso;
  assign wbr_sel = !select_wir && (instr == WS_AUTH);

  ieee1500_wbr #(.N(RESP_W)) u_wbr (
    .clk, .rst_n, .select(wbr_sel), .capture_wr, .shift_wr, .update_wr,
    .cti({garbled, digest}), .wsi, .wso(wbr_wso), .cto()
  );

  // one-bit wrapper bypass register
  logic bypass_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)                                 bypass_q <= 1'b0;
    else if (!select_wir && !wbr_sel && shift_wr) bypass_q <= wsi;

  always_comb
    if (select_wir)   wso = wir_wso;
    else if (wbr_sel) wso = wbr_wso;
    else              wso = bypass_q;

  // The hash only starts on a fresh garbled value and never overlaps itself.
  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n)
                                 g_done |-> !h_busy);

endmodule
