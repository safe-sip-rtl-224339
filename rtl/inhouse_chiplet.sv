// inhouse_chiplet: the integrator's trusted chiplet, which evaluates the
// multi-party authentication.
//
// Each vendor chiplet sends {G(S_i), d_i} over the interposer, where G(S_i)
// is its garbled signature and d_i = SHA-256(G(S_i)). One wrapper boundary
// register per chiplet receives the stream. On eval_start the chiplet
// hashes the concatenation G(S_1)||...||G(S_NC) (G(S_1) in the top bits)
// into H, then auth_eval compares d_i and H with the references: the
// vendor-supplied digests on the first boot, the OTP copies afterwards. On
// a successful first boot H goes to OTP word 0 and d_i to word i+1,
// one word per cycle. The in-house chiplet never sees a plain signature.
// The SHA + Eval structure and storing the hash in OTP follow the published
// framework; the message layout and the OTP word map are this design's.
//
// Interface: wsi[i] is chiplet i's serial data, moved by shift_wr and
// presented by update_wr while select_wbr is high (driven by the secure boot
// controller). responsive flags the chiplets that answered in time.
// Timing: eval_done pulses sha_cycles(NC*W*K) + 2 cycles after eval_start,
// plus NC + 1 cycles when the OTP is programmed. auth, chiplet_en and
// hash_out then hold until the next evaluation.
// Left unused on purpose: the receiving WBRs' serial outputs (the
// response ends here), the hash core's busy flag (eval is sequenced by its
// done pulse) and the programmed flags of the digest words (enrollment is
// read from word 0, which is written in the same sequence).
module inhouse_chiplet
  import safe_sip_pkg::*;
#(
  parameter int unsigned W  = SIG_W,
  parameter int unsigned K  = KAPPA,
  parameter int unsigned NC = N_CHIPLETS,
  localparam int unsigned G_W    = W * K,
  localparam int unsigned RESP_W = G_W + DIGEST_W
) (
  input  logic          clk,
  input  logic          rst_n,
  // wrapper data from the garbled chiplets
  input  logic [NC-1:0] wsi,
  input  logic          select_wbr,
  input  logic          shift_wr,
  input  logic          update_wr,
  // evaluation control
  input  logic          eval_start,
  input  logic [NC-1:0] responsive,
  input  digest_t       vendor_digest [NC],
  output logic          eval_done,
  output logic          auth,
  output logic [NC-1:0] chiplet_en,
  output digest_t       hash_out,
  output digest_t       hash_otp,
  output logic          enrolled,
  output logic          otp_err
);

  // ---- receive side: one WBR per chiplet ----
  logic [RESP_W-1:0] resp [NC];
  logic [NC-1:0]     rx_wso;

  for (genvar i = 0; i < NC; i++) begin : g_rx
    ieee1500_wbr #(.N(RESP_W)) u_wbr (
      .clk, .rst_n, .select(select_wbr), .capture_wr(1'b0), .shift_wr, .update_wr,
      .cti('0), .wsi(wsi[i]), .wso(rx_wso[i]), .cto(resp[i])
    );
  end

  logic [NC*G_W-1:0] g_all;
  digest_t           dig [NC];
  always_comb
    for (int i = 0; i < NC; i++) begin
      g_all[(NC-1-i)*G_W +: G_W] = resp[i][RESP_W-1 -: G_W];
      dig[i]                     = resp[i][DIGEST_W-1:0];
    end

  // ---- H = SHA-256(G1 || ... || GNC) ----
  logic h_start, h_busy, h_done;

  sha256_core #(.MSG_BITS(NC * G_W)) u_sha (
    .clk, .rst_n, .start(h_start), .msg(g_all),
    .busy(h_busy), .done(h_done), .digest(hash_out)
  );

  // ---- OTP ----
  localparam int unsigned OTP_WORDS = NC + 1;
  localparam int unsigned OTP_AW    = $clog2(OTP_WORDS);

  logic                 prog_en;
  logic [OTP_AW-1:0]    prog_addr;
  digest_t              prog_data;
  digest_t              otp_rd [OTP_WORDS];
  logic [OTP_WORDS-1:0] otp_prog;

  otp_memory #(.WORDS(OTP_WORDS), .WIDTH(DIGEST_W)) u_otp (
    .clk, .rst_n, .prog_en, .prog_addr, .prog_data,
    .rd_data(otp_rd), .programmed(otp_prog), .prog_err(otp_err)
  );

  digest_t otp_dig [NC];
  always_comb
    for (int i = 0; i < NC; i++) otp_dig[i] = otp_rd[i+1];

  assign hash_otp = otp_rd[0];
  assign enrolled = otp_prog[0];

  // ---- evaluation ----
  logic e_start, e_done, e_program;

  auth_eval #(.NC(NC)) u_eval (
    .clk, .rst_n, .start(e_start), .enrolled,
    .hash_h(hash_out), .digest(dig), .responsive, .vendor_digest,
    .otp_h(otp_rd[0]), .otp_digest(otp_dig),
    .done(e_done), .auth, .chiplet_en, .prog_req(e_program)
  );

  // ---- sequencer ----
  typedef enum logic [2:0] {S_IDLE, S_HASH, S_EVAL, S_PROG, S_DONE} state_e;
  state_e state;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state     <= S_IDLE;
      prog_addr <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (eval_start) state <= S_HASH;
        S_HASH: if (h_done) state <= S_EVAL;
        S_EVAL: if (e_done) begin
          prog_addr <= '0;
          state     <= e_program ? S_PROG : S_DONE;
        end
        S_PROG: begin
          prog_addr <= prog_addr + 1'b1;
          if (int'(prog_addr) == OTP_WORDS - 1) state <= S_DONE;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end

  assign h_start   = (state == S_IDLE) && eval_start;
  assign e_start   = (state == S_HASH) && h_done;
  assign prog_en   = (state == S_PROG);
  always_comb begin
    prog_data = hash_out;
    for (int i = 0; i < NC; i++)
      if (int'(prog_addr) == i + 1) prog_data = dig[i];
  end
  assign eval_done = (state == S_DONE);

endmodule
