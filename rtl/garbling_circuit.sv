// garbling_circuit: turns a W-bit chiplet signature S into its garbled form
// G(S) of g = W * kappa bits.
//
// Each signature bit b^i is replaced by a kappa-bit label
//     b^i = 0  ->  r0^i || L0
//     b^i = 1  ->  r1^i || L1,   r1^i = ~r0^i
// where r0^i is a random masking bit per signature position and L0, L1 are
// two random labels shared by all positions, all drawn from the chiplet's
// TRNG. The label formulas and g = W * kappa are the published scheme; that
// r is one bit and L therefore kappa-1 bits wide (so that each label is
// exactly kappa bits) is this design's reading of it. Label i occupies
// garbled[i*KAPPA +: KAPPA], with the masking bit as its top bit.
//
// Re-authentication compares a new hash with one stored at enrollment, so
// the random labels have to be the same at every boot. They are therefore
// sampled from the TRNG once, when rekey is pulsed (the vendor does this
// when it enrolls the chiplet), and then held. In silicon they would live in
// non-volatile storage; here they are registers that reset does not clear.
//
// Timing: pulse start with sig valid; garbled is registered and done pulses
// on the next clock edge (one-cycle latency). rekey takes one cycle and is
// ignored when start is high at the same time.
module garbling_circuit
  import safe_sip_pkg::*;
#(
  parameter int unsigned W = SIG_W,
  parameter int unsigned K = KAPPA
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             rekey,
  input  logic [W-1:0]     trng_r,   // masking bits r0^i
  input  logic [K-2:0]     trng_l0,  // label L0
  input  logic [K-2:0]     trng_l1,  // label L1
  input  logic             start,
  input  logic [W-1:0]     sig,
  output logic             done,
  output logic [W*K-1:0]   garbled
);

  // Garbling secrets: kept across resets (see header).
  logic [W-1:0] r0;
  logic [K-2:0] lab0, lab1;

  always_ff @(posedge clk)
    if (rekey && !start) begin
      r0   <= trng_r;
      lab0 <= trng_l0;
      lab1 <= trng_l1;
    end

  logic [W*K-1:0] g_next;
  always_comb
    for (int i = 0; i < W; i++)
      g_next[i*K +: K] = sig[i] ? {~r0[i], lab1} : {r0[i], lab0};

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      done    <= 1'b0;
      garbled <= '0;
    end else begin
      done <= start;
      if (start) garbled <= g_next;
    end

endmodule
