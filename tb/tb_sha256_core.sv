// tb_sha256_core: self-checking test of sha256_core.
// Checks the FIPS 180-4 example digests of "abc" (one block) and of the
// 448-bit "abcdbcdecdef..." message (two blocks), then random messages of the
// chiplet size (a 1024-bit message at reduced W*kappa) against the
// behavioural reference in sha256_ref_pkg, and the cycle count from start
// to done (66 cycles per padded block).
module tb_sha256_core;
  import safe_sip_pkg::*;
  import sha256_ref_pkg::*;

  localparam int unsigned L1 = 24, L2 = 448, L3 = 1024;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic start1, start2, start3;
  logic [L1-1:0] msg1;
  logic [L2-1:0] msg2;
  logic [L3-1:0] msg3;
  logic busy1, busy2, busy3, done1, done2, done3;
  digest_t dig1, dig2, dig3;

  sha256_core #(.MSG_BITS(L1)) u1 (.clk, .rst_n, .start(start1), .msg(msg1), .busy(busy1), .done(done1), .digest(dig1));
  sha256_core #(.MSG_BITS(L2)) u2 (.clk, .rst_n, .start(start2), .msg(msg2), .busy(busy2), .done(done2), .digest(dig2));
  sha256_core #(.MSG_BITS(L3)) u3 (.clk, .rst_n, .start(start3), .msg(msg3), .busy(busy3), .done(done3), .digest(dig3));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // Pulse start for one cycle (driven at the falling edge) and return the
  // number of clock edges from the one that samples start to the one that
  // raises done.
  task automatic run1(output int cyc);
    int unsigned t0;
    @(negedge clk) start1 = 1; @(negedge clk) start1 = 0; t0 = cycle;
    do @(negedge clk); while (!done1);
    cyc = int'(cycle - t0);
  endtask
  task automatic run2(output int cyc);
    int unsigned t0;
    @(negedge clk) start2 = 1; @(negedge clk) start2 = 0; t0 = cycle;
    do @(negedge clk); while (!done2);
    cyc = int'(cycle - t0);
  endtask
  task automatic run3(output int cyc);
    int unsigned t0;
    @(negedge clk) start3 = 1; @(negedge clk) start3 = 0; t0 = cycle;
    do @(negedge clk); while (!done3);
    cyc = int'(cycle - t0);
  endtask

  initial begin
    int cyc;
    bytes_t q;
    logic [255:0] expect_d;
    start1 = 0; start2 = 0; start3 = 0;
    msg1 = "abc";
    msg2 = "abcdbcdecdefdefgefghfghighijhijkijkljklmklmnlmnomnopnopq";
    msg3 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // "abc"
    run1(cyc);
    check(dig1 == 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad, "abc digest");
    check(cyc == 66, $sformatf("abc latency %0d", cyc));

    // two-block message
    run2(cyc);
    check(dig2 == 256'h248d6a61d20638b8e5c026930c3e6039a33ce45964ff2167f6ecedd419db06c1, "448-bit digest");
    check(cyc == 2 * 66, $sformatf("448-bit latency %0d", cyc));

    // random chiplet-sized messages against the reference model
    for (int n = 0; n < 4; n++) begin
      for (int i = 0; i < L3 / 32; i++) msg3[32*i +: 32] = $urandom;
      q = {};
      for (int i = L3 / 8 - 1; i >= 0; i--) q.push_back(msg3[8*i +: 8]);
      expect_d = sha256(q);
      run3(cyc);
      check(dig3 == expect_d, $sformatf("random message %0d digest", n));
      check(cyc == int'(sha_cycles(L3)), $sformatf("1024-bit latency %0d", cyc));
      check(!busy3 || done3, "busy while done only");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
