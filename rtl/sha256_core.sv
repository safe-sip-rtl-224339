// sha256_core: SHA-256 (FIPS 180-4) of a message of fixed length MSG_BITS.
//
// In SAFE-SiP every garbled chiplet hashes its own garbled signature G(S)
// before it leaves the chiplet, and the in-house chiplet hashes the
// concatenation G(S1)||...||G(S4) (Eq. H = Hash(G(S1),...,G(S4))). Both
// messages have a length fixed by W, kappa and the chiplet count, so the
// padding (a single 1 bit, zeros, then the 64-bit length) is wired in and
// the core walks through the padded blocks itself.
//
// Architecture (this design's choice; only the function is given): one
// SHA-256 round per clock, the message schedule kept as a sliding window of
// 16 words. Each block takes one load cycle, 64 round cycles and one cycle
// adding the working variables into the chaining value, so a message takes
// sha_blocks(MSG_BITS) * 66 cycles from the start pulse to the done pulse.
//
// Interface: pulse start for one cycle with msg valid; msg must stay stable
// until done. done pulses for one cycle and digest then holds the result
// (big-endian, first hash word in bits 255:224) until the next start.
// busy is high from the cycle after start up to and including done.
module sha256_core
  import safe_sip_pkg::*;
#(
  parameter int unsigned MSG_BITS = SIG_W * KAPPA
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [MSG_BITS-1:0] msg,
  output logic                busy,
  output logic                done,
  output digest_t             digest
);

  localparam int unsigned NBLK  = sha_blocks(MSG_BITS);
  localparam int unsigned PBITS = NBLK * 512;
  localparam int unsigned BW    = (NBLK > 1) ? $clog2(NBLK) : 1;

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_ROUND, S_ADD} state_e;

  state_e       state;
  logic [BW-1:0] blk;
  logic [5:0]   rnd;
  logic [31:0]  hv [8];  // chaining value
  logic [31:0]  wv [8];  // working variables a..h
  logic [31:0]  w  [16]; // message schedule window, w[0] = W_t

  // Padded message, first block in the top 512 bits.
  logic [PBITS-1:0] padded;
  always_comb begin
    padded = '0;
    padded[PBITS-1 -: MSG_BITS]  = msg;
    padded[PBITS-1-MSG_BITS]     = 1'b1;
    padded[63:0]                 = 64'(MSG_BITS);
  end

  logic [511:0] block;
  assign block = padded[(PBITS - 512) - 512 * int'(blk) +: 512];

  function automatic logic [31:0] rotr(input logic [31:0] x, input int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  // One compression round on a..h with schedule word wt.
  logic [31:0] t1, t2, s0, s1, ch, maj, w_next;
  always_comb begin
    s1  = rotr(wv[4], 6) ^ rotr(wv[4], 11) ^ rotr(wv[4], 25);
    ch  = (wv[4] & wv[5]) ^ (~wv[4] & wv[6]);
    t1  = wv[7] + s1 + ch + SHA_K[rnd] + w[0];
    s0  = rotr(wv[0], 2) ^ rotr(wv[0], 13) ^ rotr(wv[0], 22);
    maj = (wv[0] & wv[1]) ^ (wv[0] & wv[2]) ^ (wv[1] & wv[2]);
    t2  = s0 + maj;
    // W_{t+16} = sigma1(W_{t+14}) + W_{t+9} + sigma0(W_{t+1}) + W_t
    w_next = (rotr(w[14], 17) ^ rotr(w[14], 19) ^ (w[14] >> 10)) + w[9]
           + (rotr(w[1], 7) ^ rotr(w[1], 18) ^ (w[1] >> 3)) + w[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      blk   <= '0;
      rnd   <= '0;
      done  <= 1'b0;
      for (int i = 0; i < 8; i++) begin
        hv[i] <= SHA_H0[i];
        wv[i] <= '0;
      end
      for (int i = 0; i < 16; i++) w[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          blk <= '0;
          for (int i = 0; i < 8; i++) hv[i] <= SHA_H0[i];
          state <= S_LOAD;
        end
        S_LOAD: begin
          for (int i = 0; i < 8; i++)  wv[i] <= hv[i];
          for (int i = 0; i < 16; i++) w[i]  <= block[511 - 32*i -: 32];
          rnd   <= '0;
          state <= S_ROUND;
        end
        S_ROUND: begin
          wv[0] <= t1 + t2;
          wv[1] <= wv[0];
          wv[2] <= wv[1];
          wv[3] <= wv[2];
          wv[4] <= wv[3] + t1;
          wv[5] <= wv[4];
          wv[6] <= wv[5];
          wv[7] <= wv[6];
          for (int i = 0; i < 15; i++) w[i] <= w[i+1];
          w[15] <= w_next;
          rnd   <= rnd + 6'd1;
          if (rnd == 6'd63) state <= S_ADD;
        end
        S_ADD: begin
          for (int i = 0; i < 8; i++) hv[i] <= hv[i] + wv[i];
          if (int'(blk) == NBLK - 1) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            blk   <= blk + 1'b1;
            state <= S_LOAD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE) || done;

  always_comb
    for (int i = 0; i < 8; i++) digest[255 - 32*i -: 32] = hv[i];

endmodule
