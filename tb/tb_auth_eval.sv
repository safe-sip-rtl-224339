// tb_auth_eval: self-checking test of auth_eval with four chiplets. Random
// digests; checks enrollment (vendor digests), re-authentication (OTP
// digests and H), a counterfeit chiplet being disabled alone, a wrong H,
// an unresponsive chiplet, and the one-cycle latency.
module tb_auth_eval;
  import safe_sip_pkg::*;
  localparam int unsigned NC = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, enrolled = 0, done, auth, prog_req;
  digest_t hash_h, otp_h, digest [NC], vendor_digest [NC], otp_digest [NC];
  logic [NC-1:0] responsive, chiplet_en;

  auth_eval #(.NC(NC)) dut (.clk, .rst_n, .start, .enrolled, .hash_h, .digest, .responsive,
                            .vendor_digest, .otp_h, .otp_digest, .done, .auth, .chiplet_en, .prog_req);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic digest_t rnd();
    digest_t d;
    for (int i = 0; i < 256; i += 32) d[i +: 32] = $urandom;
    return d;
  endfunction

  task automatic run(input string tag, input bit e_auth, input logic [NC-1:0] e_en, input bit e_prog);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    check(done, {tag, ": done after one cycle"});
    check(auth == e_auth, $sformatf("%s: auth %0b", tag, auth));
    check(chiplet_en == e_en, $sformatf("%s: chiplet_en %b", tag, chiplet_en));
    check(prog_req == e_prog, $sformatf("%s: prog_req %0b", tag, prog_req));
    @(negedge clk);
    check(!done && !prog_req, {tag, ": pulses end"});
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hash_h = rnd(); otp_h = rnd();
    for (int i = 0; i < NC; i++) begin
      digest[i] = rnd(); vendor_digest[i] = digest[i]; otp_digest[i] = rnd();
    end
    responsive = '1;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // first boot: digests against the vendors' values
    run("enroll ok", 1, 4'b1111, 1);
    vendor_digest[1] = ~vendor_digest[1];
    run("enroll, chiplet 1 counterfeit", 0, 4'b1101, 0);
    vendor_digest[1] = digest[1];
    // re-authentication against OTP
    enrolled = 1;
    run("enrolled, OTP differs", 0, 4'b0000, 0);
    for (int i = 0; i < NC; i++) otp_digest[i] = digest[i];
    otp_h = hash_h;
    run("reauth ok", 1, 4'b1111, 0);
    otp_digest[3] = ~otp_digest[3];
    run("reauth, chiplet 3 tampered", 0, 4'b0111, 0);
    otp_digest[3] = digest[3];
    otp_h[17] = ~otp_h[17];
    run("reauth, H differs", 0, 4'b1111, 0);
    otp_h = hash_h;
    responsive = 4'b1011;
    run("reauth, chiplet 2 silent", 0, 4'b1011, 0);
    responsive = '1;
    run("reauth ok again", 1, 4'b1111, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
