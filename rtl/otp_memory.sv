// otp_memory: one-time programmable store for the enrolled hashes.
//
// After the first successful authentication the in-house chiplet writes the
// combined hash H and each chiplet's attestation digest here; later boots
// compare against them. Each word can be programmed once: a write to a word
// that is already programmed is refused and flagged on prog_err, and the
// per-word programmed flags are readable. All words are read in parallel.
//
// The storage would be an eFuse or antifuse macro in silicon; here it is a
// register array that starts blank (all zero, not programmed) and that reset
// does not clear, since it is non-volatile. Storing the hash in OTP is from
// the published flow; word layout, width and write protocol are this
// design's. Timing: a write takes effect on the rising edge where prog_en is
// high; prog_err is registered and pulses on the following cycle.
// The blank state comes from the declaration initialisers, so a lint tool
// notes that initialised variables are also written in always_ff; that is
// intended and stands in for the fuse macro's erased state.
module otp_memory #(
  parameter int unsigned WORDS = 5,
  parameter int unsigned WIDTH = 256,
  localparam int unsigned AW   = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             prog_en,
  input  logic [AW-1:0]    prog_addr,
  input  logic [WIDTH-1:0] prog_data,
  output logic [WIDTH-1:0] rd_data [WORDS],
  output logic [WORDS-1:0] programmed,
  output logic             prog_err
);

  logic [WIDTH-1:0] mem [WORDS] = '{default: '0};
  logic [WORDS-1:0] fused = '0;

  always_ff @(posedge clk)
    if (prog_en && (int'(prog_addr) < WORDS) && !fused[prog_addr]) begin
      mem[prog_addr]   <= prog_data;
      fused[prog_addr] <= 1'b1;
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) prog_err <= 1'b0;
    else        prog_err <= prog_en && ((int'(prog_addr) >= WORDS) || fused[prog_addr]);

  assign rd_data    = mem;
  assign programmed = fused;

endmodule
