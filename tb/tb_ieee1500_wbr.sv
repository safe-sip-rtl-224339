// tb_ieee1500_wbr: self-checking test of ieee1500_wbr. Two registers are
// chained as a garbled chiplet and the in-house chiplet are on the
// interposer: the first captures a random word and shifts it out MSB first,
// the second shifts it in and presents it after update. Also checks that an
// unselected register holds and that a transfer takes exactly N shifts.
module tb_ieee1500_wbr;
  localparam int unsigned N = 100;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic sel_a = 0, sel_b = 0, capture_wr = 0, shift_wr = 0, update_wr = 0;
  logic [N-1:0] cti, cto_a, cto_b, dummy;
  logic link, wso_b;

  ieee1500_wbr #(.N(N)) a (.clk, .rst_n, .select(sel_a), .capture_wr, .shift_wr, .update_wr,
                           .cti, .wsi(1'b0), .wso(link), .cto(cto_a));
  ieee1500_wbr #(.N(N)) b (.clk, .rst_n, .select(sel_b), .capture_wr(1'b0), .shift_wr, .update_wr,
                           .cti('0), .wsi(link), .wso(wso_b), .cto(cto_b));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] word, seen;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3; n++) begin
      for (int i = 0; i < N; i += 32) word[i +: 32] = $urandom;
      word = word & {N{1'b1}};
      cti = word;
      @(negedge clk) begin sel_a = 1; sel_b = 1; capture_wr = 1; end
      @(negedge clk) capture_wr = 0;
      check(link == word[N-1], "MSB first on wso after capture");
      shift_wr = 1;
      for (int i = 0; i < N; i++) begin
        seen[N-1-i] = link;
        @(negedge clk);
      end
      shift_wr = 0; update_wr = 1;
      @(negedge clk) update_wr = 0;
      check(seen == word, $sformatf("serial stream %0d", n));
      check(cto_b == word, $sformatf("received word %0d after %0d shifts", n, N));
      check(cto_a == '0, "sender has shifted out its whole word");
    end
    // an unselected register ignores the controls
    dummy = cto_b;
    cti = ~cti;
    @(negedge clk) begin sel_a = 0; sel_b = 0; capture_wr = 1; end
    @(negedge clk) begin capture_wr = 0; shift_wr = 1; end
    repeat (5) @(negedge clk);
    @(negedge clk) begin shift_wr = 0; update_wr = 1; end
    @(negedge clk) update_wr = 0;
    check(cto_b == dummy, "unselected register holds");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
