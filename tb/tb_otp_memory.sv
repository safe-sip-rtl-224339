// tb_otp_memory: self-checking test of otp_memory. Checks that the store
// starts blank, that each word programs once, that a second write or an
// address out of range is refused with prog_err, and that reset keeps the
// contents.
module tb_otp_memory;
  localparam int unsigned WORDS = 5, WIDTH = 256, AW = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic prog_en = 0, prog_err;
  logic [AW-1:0] prog_addr = '0;
  logic [WIDTH-1:0] prog_data = '0, rd_data [WORDS], model [WORDS];
  logic [WORDS-1:0] programmed;

  otp_memory #(.WORDS(WORDS), .WIDTH(WIDTH)) dut (.clk, .rst_n, .prog_en, .prog_addr, .prog_data,
                                                 .rd_data, .programmed, .prog_err);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic write(input int a, input logic [WIDTH-1:0] d, input bit expect_err);
    @(negedge clk) begin prog_en = 1; prog_addr = AW'(a); prog_data = d; end
    @(negedge clk) prog_en = 0;
    check(prog_err == expect_err, $sformatf("prog_err=%0b for address %0d", prog_err, a));
  endtask

  task automatic compare(input string tag);
    for (int i = 0; i < WORDS; i++)
      check(rd_data[i] == model[i], $sformatf("%s: word %0d", tag, i));
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] d;
    for (int i = 0; i < WORDS; i++) model[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(programmed == '0, "blank after power-up");
    compare("blank");
    for (int i = 0; i < WORDS; i += 2) begin
      for (int j = 0; j < WIDTH; j += 32) d[j +: 32] = $urandom;
      write(i, d, 0);
      model[i] = d;
    end
    check(programmed == 5'b10101, $sformatf("programmed flags %b", programmed));
    compare("after first writes");
    write(2, ~model[2], 1);
    write(6, '1, 1);
    compare("after refused writes");
    rst_n = 0; @(negedge clk); rst_n = 1;
    compare("after reset");
    check(programmed == 5'b10101, "flags kept over reset");
    write(1, 256'h1234, 0);
    model[1] = 256'h1234;
    compare("after late write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
