// tb_ifft_ctrl: self-checking test of the control block (LOG_N = 9).
// Checks that done is low after reset, that a start runs the stage counter
// 0, 1, ..., 8 with en high, that done rises exactly 9 rising edges after
// the start edge and stays high, that a start while busy is ignored, and
// that a new start after done restarts the sequence.
module tb_ifft_ctrl;

  localparam int unsigned LOG_N = 9;
  localparam int unsigned SW = $clog2(LOG_N + 1);

  int checks = 0;
  int failures = 0;

  logic          clk = 1'b0;
  logic          rst, start, en, done;
  logic [SW-1:0] stage;

  ifft_ctrl #(.LOG_N(LOG_N)) dut (.clk(clk), .rst(rst), .start(start), .en(en), .stage(stage), .done(done));

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_bit(input logic got, input logic want, input string what);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s: got %0b want %0b at %0t", what, got, want, $time);
    end
  endtask

  // Runs one transform; optionally pulses start again mid-run.
  task automatic run(input bit poke_busy);
    int cycles;
    start = 1'b1;
    #1;
    expect_bit(en, 1'b1, "en in start cycle");
    checks++;
    if (stage != 0) failures++;
    @(posedge clk); #1;
    start = 1'b0;
    cycles = 1;
    while (!done && cycles < 50) begin
      expect_bit(en, 1'b1, "en while busy");
      checks++;
      if (stage != SW'(cycles)) begin
        failures++;
        $display("FAIL stage %0d expected %0d", stage, cycles);
      end
      if (poke_busy && cycles == 4) start = 1'b1;
      @(posedge clk); #1;
      start = 1'b0;
      cycles++;
    end
    checks++;
    if (cycles != LOG_N) begin
      failures++;
      $display("FAIL done after %0d edges, expected %0d", cycles, LOG_N);
    end
    expect_bit(en, 1'b0, "en after done");
    repeat (3) @(posedge clk);
    #1;
    expect_bit(done, 1'b1, "done held");
  endtask

  initial begin
    rst = 1'b1; start = 1'b0;
    repeat (2) @(posedge clk);
    #1;
    expect_bit(done, 1'b0, "done after reset");
    expect_bit(en, 1'b0, "en after reset");
    rst = 1'b0;
    run(1'b0);
    run(1'b1);
    // done falls when a new transform starts.
    start = 1'b1;
    @(posedge clk); #1;
    start = 1'b0;
    expect_bit(done, 1'b0, "done low while busy");
    rst = 1'b1;
    @(posedge clk); #1;
    expect_bit(done, 1'b0, "done low after reset mid-run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
