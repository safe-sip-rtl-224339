// tb_garbling_circuit: self-checking test of garbling_circuit at the default
// W = 64, kappa = 64. Draws labels with rekey, garbles random signatures and
// checks every kappa-bit label against the formula r0^i||L0 / ~r0^i||L1,
// the one-cycle latency, that labels survive a reset and that a second
// rekey changes them.
module tb_garbling_circuit;
  import safe_sip_pkg::*;

  localparam int unsigned W = SIG_W, K = KAPPA;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rekey = 0, start = 0, done;
  logic [W-1:0] trng_r, sig;
  logic [K-2:0] trng_l0, trng_l1;
  logic [W*K-1:0] garbled;

  garbling_circuit dut (.clk, .rst_n, .rekey, .trng_r, .trng_l0, .trng_l1,
                        .start, .sig, .done, .garbled);

  // model of the drawn secrets
  logic [W-1:0] m_r;
  logic [K-2:0] m_l0, m_l1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic draw();
    for (int i = 0; i < W; i += 32) trng_r[i +: 32] = $urandom;
    trng_l0 = {$urandom, $urandom};
    trng_l1 = {$urandom, $urandom};
    m_r = trng_r; m_l0 = trng_l0; m_l1 = trng_l1;
    @(negedge clk) rekey = 1;
    @(negedge clk) rekey = 0;
    // the TRNG keeps producing new bits; they must not be taken
    trng_r = ~trng_r; trng_l0 = ~trng_l0; trng_l1 = ~trng_l1;
  endtask

  task automatic garble_and_check(input logic [W-1:0] s, input string tag);
    logic [W*K-1:0] exp_g;
    int bad = 0;
    for (int i = 0; i < W; i++)
      exp_g[i*K +: K] = s[i] ? {~m_r[i], m_l1} : {m_r[i], m_l0};
    @(negedge clk) begin sig = s; start = 1; end
    @(negedge clk) start = 0;
    check(done == 1'b1, {tag, ": done one cycle after start"});
    for (int i = 0; i < W; i++) if (garbled[i*K +: K] != exp_g[i*K +: K]) bad++;
    check(bad == 0, $sformatf("%s: %0d of %0d labels wrong", tag, bad, W));
    @(negedge clk);
    check(done == 1'b0, {tag, ": done is a pulse"});
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W*K-1:0] g_first;
    sig = '0; trng_r = '0; trng_l0 = '0; trng_l1 = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    draw();
    garble_and_check('0, "all zero");
    garble_and_check('1, "all one");
    for (int n = 0; n < 6; n++) garble_and_check({$urandom, $urandom}, $sformatf("random %0d", n));
    // same signature garbles the same way after a reset
    sig = 64'h0123_4567_89ab_cdef;
    garble_and_check(sig, "before reset");
    g_first = garbled;
    rst_n = 0; @(negedge clk); rst_n = 1;
    garble_and_check(64'h0123_4567_89ab_cdef, "after reset");
    check(garbled == g_first, "labels kept over reset");
    // new labels give a different garbled value
    draw();
    garble_and_check(64'h0123_4567_89ab_cdef, "after rekey");
    check(garbled != g_first, "rekey changes G");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
