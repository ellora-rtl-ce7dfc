// tb_cla_adder: self-checking test of the carry-lookahead adder at 16 bits
// (the butterfly's width) and at 32 bits (the multiplier's final adder).
// Corner values and random operands, both carry-in values, compared with the
// exact signed sum a + b + cin computed by the simulator.
module tb_cla_adder;

  int checks = 0;
  int failures = 0;

  logic signed [15:0] a16, b16;
  logic signed [16:0] s16;
  logic signed [31:0] a32, b32;
  logic signed [32:0] s32;
  logic               cin;

  cla_adder #(.W(16)) dut16 (.a(a16), .b(b16), .cin(cin), .sum(s16));
  cla_adder #(.W(32)) dut32 (.a(a32), .b(b32), .cin(cin), .sum(s32));

  task automatic check16(input logic signed [15:0] x, input logic signed [15:0] y, input logic c);
    longint expected;
    a16 = x; b16 = y; cin = c;
    #1;
    expected = longint'(x) + longint'(y) + longint'(c);
    checks++;
    if (longint'(s16) != expected) begin
      failures++;
      if (failures < 10) $display("FAIL16 %0d + %0d + %0d = %0d, expected %0d", x, y, c, s16, expected);
    end
  endtask

  task automatic check32(input logic signed [31:0] x, input logic signed [31:0] y, input logic c);
    longint expected;
    a32 = x; b32 = y; cin = c;
    #1;
    expected = longint'(x) + longint'(y) + longint'(c);
    checks++;
    if (longint'(s32) != expected) begin
      failures++;
      if (failures < 10) $display("FAIL32 %0d + %0d + %0d = %0d, expected %0d", x, y, c, s32, expected);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [15:0] corners [6] = '{16'sh0000, 16'sh0001, 16'shFFFF, 16'sh7FFF, 16'sh8000, 16'sh5555};
    a32 = '0; b32 = '0;
    foreach (corners[i]) foreach (corners[j]) for (int c = 0; c < 2; c++)
      check16(corners[i], corners[j], 1'(c));
    for (int i = 0; i < 5000; i++) begin
      check16(16'($urandom), 16'($urandom), 1'($urandom));
      check32(32'($urandom), 32'($urandom), 1'($urandom));
    end
    // Subtraction as used by the butterfly: a + ~b + 1 = a - b.
    for (int i = 0; i < 1000; i++) begin
      logic signed [15:0] x, y;
      x = 16'($urandom); y = 16'($urandom);
      a16 = x; b16 = ~y; cin = 1'b1;
      #1;
      checks++;
      if (longint'(s16) != longint'(x) - longint'(y)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
