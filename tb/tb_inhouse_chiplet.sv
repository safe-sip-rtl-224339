// tb_inhouse_chiplet: self-checking test of inhouse_chiplet at W = kappa = 8
// with four chiplets. The testbench shifts each chiplet's response
// {G(S_i), d_i} in over the wrapper lines, starts the evaluation and checks
// H and the decisions against the reference model: a refused enrollment
// (wrong vendor digest), a good enrollment that programs the OTP, a good
// re-authentication, a counterfeit chiplet that is disabled alone, a garbled
// value altered on the interposer (digest kept), which only the combined H
// catches, and the evaluation latency with and without OTP programming.
module tb_inhouse_chiplet;
  import safe_sip_pkg::*;
  localparam int unsigned W = 8, K = 8, NC = 4, G_W = W * K, RESP_W = G_W + DIGEST_W;
  typedef safe_sip_ref_pkg::safe_sip_ref #(W, K, NC) ref_t;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int unsigned cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic [NC-1:0] wsi = '0, responsive = '1, chiplet_en;
  logic select_wbr = 0, shift_wr = 0, update_wr = 0, eval_start = 0;
  logic eval_done, auth, enrolled, otp_err;
  digest_t vendor_digest [NC], hash_out, hash_otp;

  inhouse_chiplet #(.W(W), .K(K), .NC(NC)) dut (
    .clk, .rst_n, .wsi, .select_wbr, .shift_wr, .update_wr, .eval_start, .responsive,
    .vendor_digest, .eval_done, .auth, .chiplet_en, .hash_out, .hash_otp, .enrolled, .otp_err);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  ref_t::garbled_t g [NC];
  digest_t d [NC];

  task automatic send_and_eval(input string tag, input bit e_auth, input logic [NC-1:0] e_en,
                               input bit e_prog);
    logic [RESP_W-1:0] resp [NC];
    int unsigned t0, lat;
    for (int i = 0; i < NC; i++) resp[i] = {g[i], d[i]};
    select_wbr = 1; shift_wr = 1;
    for (int b = RESP_W - 1; b >= 0; b--) begin
      for (int i = 0; i < NC; i++) wsi[i] = resp[i][b];
      @(negedge clk);
    end
    shift_wr = 0; update_wr = 1;
    @(negedge clk) begin update_wr = 0; select_wbr = 0; eval_start = 1; end
    @(negedge clk) eval_start = 0;
    t0 = cycle;
    while (!eval_done) @(negedge clk);
    lat = cycle - t0;
    check(lat == sha_cycles(NC * G_W) + 2 + (e_prog ? NC + 1 : 0),
          $sformatf("%s: latency %0d", tag, lat));
    check(hash_out == ref_t::hash_all(g), {tag, ": H"});
    check(auth == e_auth, $sformatf("%s: auth %0b", tag, auth));
    check(chiplet_en == e_en, $sformatf("%s: chiplet_en %b", tag, chiplet_en));
    check(!otp_err, {tag, ": no OTP error"});
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    digest_t h_enrolled;
    logic [W-1:0] r, s;
    logic [K-2:0] l0, l1;
    for (int i = 0; i < NC; i++) begin
      r = $urandom; s = $urandom; l0 = $urandom; l1 = $urandom;
      g[i] = ref_t::garble(s, r, l0, l1);
      d[i] = ref_t::hash_g(g[i]);
      vendor_digest[i] = d[i];
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!enrolled, "OTP blank at start");

    vendor_digest[3][0] = ~vendor_digest[3][0];
    send_and_eval("enrollment refused", 0, 4'b0111, 0);
    check(!enrolled, "nothing stored after a refused enrollment");
    vendor_digest[3] = d[3];

    send_and_eval("enrollment", 1, 4'b1111, 1);
    check(enrolled && hash_otp == ref_t::hash_all(g), "H stored in OTP");
    h_enrolled = hash_otp;

    rst_n = 0; @(negedge clk); rst_n = 1; @(negedge clk);
    check(enrolled && hash_otp == h_enrolled, "OTP kept over reset");
    send_and_eval("reauthentication", 1, 4'b1111, 0);

    // chiplet 1 replaced by a counterfeit with another signature
    begin
      ref_t::garbled_t keep;
      digest_t keep_d;
      keep = g[1]; keep_d = d[1];
      g[1] = ref_t::garble(8'h5a, 8'h33, 7'h11, 7'h22);
      d[1] = ref_t::hash_g(g[1]);
      send_and_eval("counterfeit chiplet 1", 0, 4'b1101, 0);
      // G altered on the way, digest left as it was: only H catches it
      g[1] = keep; g[1][5] = ~g[1][5]; d[1] = keep_d;
      send_and_eval("G tampered in transit", 0, 4'b1111, 0);
      g[1] = keep;
    end
    responsive = 4'b1110;
    send_and_eval("chiplet 0 silent", 0, 4'b1110, 0);
    responsive = '1;
    send_and_eval("reauthentication again", 1, 4'b1111, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
