// tb_secure_boot_ctrl: self-checking test of secure_boot_ctrl with four
// modelled chiplets (RESP_W = 40, TIMEOUT = 60). The chiplet models decode
// the instruction shifted on wir_wsi and raise ready a set number of cycles
// after a WS_AUTH update. Checks the instruction codes, the number of WBR
// shift cycles, single capture and evaluation start, the return to
// WS_BYPASS, boot_ok, a timeout on a silent chiplet after TIMEOUT cycles,
// and the provisioning sequence.
module tb_secure_boot_ctrl;
  import safe_sip_pkg::*;
  localparam int unsigned NC = 4, RESP_W = 40, TIMEOUT = 60;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic boot_req = 0, provision = 0, eval_done = 0, eval_auth = 0;
  logic [NC-1:0] chiplet_ready, responsive;
  logic select_wir, shift_wr, capture_wr, update_wr, wir_wsi, select_wbr, eval_start;
  logic secure_boot, boot_done, boot_ok, timed_out;

  secure_boot_ctrl #(.NC(NC), .RESP_W(RESP_W), .TIMEOUT(TIMEOUT)) dut (
    .clk, .rst_n, .boot_req, .provision, .chiplet_ready, .select_wir, .shift_wr, .capture_wr,
    .update_wr, .wir_wsi, .select_wbr, .eval_start, .eval_done, .eval_auth, .responsive,
    .secure_boot, .boot_done, .boot_ok, .timed_out);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // chiplet and tester-side monitors
  logic [WIR_W-1:0] instr_seen [$];
  int delay [NC] = '{20, 35, 10, 50};
  logic [NC-1:0] alive = '1;
  int since_auth = -1;
  int n_capture = 0, n_wbr_shift = 0, n_eval = 0, n_wait = 0;
  logic in_wait = 0;

  always @(posedge clk) begin
    if (capture_wr) n_capture++;
    if (select_wbr && shift_wr) n_wbr_shift++;
    if (eval_start) n_eval++;
  end
  // the WIR shifts LSB first: rebuild the code from the serial bits
  int bitpos = 0;
  logic [WIR_W-1:0] code;
  always @(posedge clk) begin
    if (select_wir && shift_wr) begin
      code[bitpos] = wir_wsi;
      bitpos = bitpos + 1;
    end
    if (select_wir && update_wr) begin
      instr_seen.push_back(code);
      bitpos = 0;
      since_auth = (code == WS_AUTH) ? 0 : -1;
    end else if (since_auth >= 0) since_auth++;
  end
  always_comb
    for (int i = 0; i < NC; i++)
      chiplet_ready[i] = alive[i] && since_auth >= delay[i];

  // the in-house evaluation answers 7 cycles after eval_start
  initial forever begin
    @(posedge clk);
    if (eval_start) begin
      repeat (6) @(posedge clk);
      #1 eval_done = 1;
      @(posedge clk) #1 eval_done = 0;
    end
  end

  task automatic boot(input bit prov, output int len);
    int unsigned t;
    @(negedge clk) begin boot_req = 1; provision = prov; end
    @(negedge clk) begin boot_req = 0; provision = 0; end
    t = 0;
    while (!boot_done) begin
      @(negedge clk); t++;
      if (t > 2000) break;
    end
    len = t;
    @(negedge clk);
    check(!secure_boot, "secure_boot drops after the boot");
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int len;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // provisioning: only WS_REKEY
    boot(1, len);
    check(instr_seen.size() == 1 && instr_seen[0] == WS_REKEY, "provision shifts WS_REKEY only");
    check(n_eval == 0 && n_capture == 0, "provision does not evaluate");
    check(boot_ok == 0, "provision leaves boot_ok low");
    instr_seen = {};

    // a good boot
    eval_auth = 1;
    boot(0, len);
    check(instr_seen.size() == 2 && instr_seen[0] == WS_AUTH && instr_seen[1] == WS_BYPASS,
          "boot shifts WS_AUTH then WS_BYPASS");
    check(n_capture == 1, "one capture");
    check(n_wbr_shift == RESP_W, $sformatf("%0d WBR shift cycles", n_wbr_shift));
    check(n_eval == 1, "one evaluation start");
    check(boot_ok == 1 && responsive == '1 && !timed_out, "good boot result");
    // length: 4 (WIR) + wait for the slowest chiplet + 1 capture + RESP_W + 1 update
    //         + 1 eval start + evaluation + 4 (WIR) + finish
    check(len > RESP_W + 50 && len < RESP_W + 50 + 30, $sformatf("boot length %0d", len));

    // evaluation says no
    eval_auth = 0; instr_seen = {};
    boot(0, len);
    check(boot_ok == 0, "boot_ok follows the evaluation");

    // chiplet 2 never answers
    eval_auth = 1; alive[2] = 0; n_wbr_shift = 0; instr_seen = {};
    boot(0, len);
    check(timed_out && responsive == 4'b1011, $sformatf("timeout, responsive %b", responsive));
    check(n_wbr_shift == RESP_W, "responses still collected after a timeout");
    check(len >= TIMEOUT + RESP_W, $sformatf("waited for the timeout (%0d)", len));
    alive[2] = 1;
    boot(0, len);
    check(!timed_out && responsive == '1, "all answer again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
