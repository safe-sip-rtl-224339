// tb_ieee1500_wir: self-checking test of ieee1500_wir. Checks the reset
// instruction, serial loading of each instruction, the new_instr pulse, that
// nothing changes while select_wir is low, and read-back through capture.
module tb_ieee1500_wir;
  import safe_sip_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic select_wir = 0, shift_wr = 0, capture_wr = 0, update_wr = 0, wsi = 0, wso, new_instr;
  wir_instr_e instr;

  ieee1500_wir dut (.clk, .rst_n, .select_wir, .shift_wr, .capture_wr, .update_wr, .wsi, .wso, .instr, .new_instr);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic load(input logic [WIR_W-1:0] code, input bit sel);
    for (int i = 0; i < WIR_W; i++) begin
      @(negedge clk) begin select_wir = sel; shift_wr = 1; wsi = code[i]; end
    end
    @(negedge clk) begin shift_wr = 0; update_wr = 1; end
    @(negedge clk) begin update_wr = 0; select_wir = 0; end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIR_W-1:0] rb;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(instr == WS_BYPASS, "reset instruction is WS_BYPASS");
    load(3'b001, 1);
    check(instr == WS_AUTH, "AUTH loaded");
    check(new_instr == 1'b1, "new_instr pulses after update");
    @(negedge clk);
    check(new_instr == 1'b0, "new_instr lasts one cycle");
    load(3'b010, 1);
    check(instr == WS_REKEY, "REKEY loaded");
    load(3'b001, 0);
    check(instr == WS_REKEY, "no change while WIR not selected");
    // read back the active instruction through capture and shift
    @(negedge clk) begin select_wir = 1; capture_wr = 1; end
    @(negedge clk) capture_wr = 0;
    shift_wr = 1; wsi = 0;
    for (int i = 0; i < WIR_W; i++) begin
      rb[i] = wso;
      @(negedge clk);
    end
    @(negedge clk) begin shift_wr = 0; select_wir = 0; end
    check(rb == 3'b010, $sformatf("read-back %b", rb));
    load(3'b000, 1);
    check(instr == WS_BYPASS, "BYPASS loaded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
