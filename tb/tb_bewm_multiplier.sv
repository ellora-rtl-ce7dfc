// tb_bewm_multiplier: self-checking test of the 16x16 signed Booth-encoded
// Wallace multiplier. Every Booth digit pattern is exercised by corner and
// random operands; the product is compared with the simulator's own signed
// multiplication.
module tb_bewm_multiplier;

  int checks = 0;
  int failures = 0;

  logic signed [15:0] a, b;
  logic signed [31:0] p;

  bewm_multiplier #(.W(16)) dut (.a(a), .b(b), .p(p));

  task automatic check(input logic signed [15:0] x, input logic signed [15:0] y);
    longint expected;
    a = x; b = y;
    #1;
    expected = longint'(x) * longint'(y);
    checks++;
    if (longint'(p) != expected) begin
      failures++;
      if (failures < 10) $display("FAIL %0d * %0d = %0d, expected %0d", x, y, p, expected);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [15:0] corners [8] = '{16'sh0000, 16'sh0001, 16'shFFFF, 16'sh7FFF,
                                        16'sh8000, 16'sh4000, 16'shC000, 16'sh5A82};
    foreach (corners[i]) foreach (corners[j]) check(corners[i], corners[j]);
    for (int i = 0; i < 20000; i++) check(16'($urandom), 16'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
