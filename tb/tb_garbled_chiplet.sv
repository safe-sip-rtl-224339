// tb_garbled_chiplet: self-checking test of garbled_chiplet at W = kappa = 64.
// Drives the IEEE 1500 port as a tester would: shifts WS_REKEY, then
// WS_AUTH, waits for auth_ready (checking its latency of 3 + sha_cycles),
// captures and shifts out the response and compares it with the reference
// {G(S), SHA-256(G(S))}. Also checks that the labels are kept for a second
// authentication, that the TRNG is only sampled on WS_REKEY, the bypass
// path and that the signature itself never appears on wso.
module tb_garbled_chiplet;
  import safe_sip_pkg::*;

  localparam int unsigned W = SIG_W, K = KAPPA, RESP_W = W * K + DIGEST_W;
  typedef safe_sip_ref_pkg::safe_sip_ref #(W, K, 1) ref_t;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int unsigned cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic [W-1:0] signature, trng_r;
  logic [K-2:0] trng_l0, trng_l1;
  logic select_wir = 0, shift_wr = 0, capture_wr = 0, update_wr = 0, wsi = 0, wso, auth_ready;

  garbled_chiplet dut (.clk, .rst_n, .signature, .trng_r, .trng_l0, .trng_l1,
                       .select_wir, .shift_wr, .capture_wr, .update_wr, .wsi, .wso, .auth_ready);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic load_wir(input logic [WIR_W-1:0] code);
    select_wir = 1; shift_wr = 1;
    for (int i = 0; i < WIR_W; i++) begin wsi = code[i]; @(negedge clk); end
    shift_wr = 0; update_wr = 1;
    @(negedge clk) begin update_wr = 0; select_wir = 0; end
  endtask

  task automatic read_resp(output logic [RESP_W-1:0] resp);
    capture_wr = 1;
    @(negedge clk) capture_wr = 0;
    shift_wr = 1; wsi = 0;
    for (int i = RESP_W - 1; i >= 0; i--) begin resp[i] = wso; @(negedge clk); end
    shift_wr = 0;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] r_k;
    logic [K-2:0] l0_k, l1_k;
    logic [RESP_W-1:0] resp, first;
    ref_t::garbled_t g;
    int unsigned t0;
    int bad;

    signature = 64'hfeed_c0de_1234_5678;
    trng_r  = {$urandom, $urandom};
    trng_l0 = {$urandom, $urandom};
    trng_l1 = {$urandom, $urandom};
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // enrollment of the labels
    r_k = trng_r; l0_k = trng_l0; l1_k = trng_l1;
    load_wir(WS_REKEY);
    @(negedge clk);  // labels are taken on the edge after the update
    trng_r = ~trng_r; trng_l0 = ~trng_l0; trng_l1 = ~trng_l1;

    for (int n = 0; n < 3; n++) begin
      if (n == 2) signature = {$urandom, $urandom};
      load_wir(WS_AUTH);
      t0 = cycle;  // counts the edge that applied the update
      @(negedge clk);
      check(!auth_ready, "ready cleared by the new instruction");
      while (!auth_ready) @(negedge clk);
      check(cycle - t0 == 3 + sha_cycles(W * K),
            $sformatf("ready after %0d cycles, expected %0d", cycle - t0, 3 + sha_cycles(W * K)));
      read_resp(resp);
      g = ref_t::garble(signature, r_k, l0_k, l1_k);
      check(resp[RESP_W-1 -: W*K] == g, $sformatf("garbled signature %0d", n));
      check(resp[DIGEST_W-1:0] == ref_t::hash_g(g), $sformatf("attestation digest %0d", n));
      if (n == 0) first = resp;
      if (n == 1) check(resp == first, "same response on the second boot");
      // the raw signature is not shifted out anywhere in the response
      bad = 0;
      for (int i = 0; i + W <= RESP_W; i += W) if (resp[i +: W] == signature) bad++;
      check(bad == 0, "signature not visible in response");
    end

    // bypass: one-cycle delay from wsi to wso
    load_wir(WS_BYPASS);
    shift_wr = 1;
    for (int i = 0; i < 8; i++) begin
      wsi = i[0] ^ i[2];
      @(negedge clk);
      check(wso == (i[0] ^ i[2]), "bypass register");
    end
    shift_wr = 0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
