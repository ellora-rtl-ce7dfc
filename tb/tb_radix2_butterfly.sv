// tb_radix2_butterfly: self-checking test of one butterfly.
// Drives random and full-scale Xa, Xb with twiddles from the table model,
// checks Ya/Yb one clock edge later against the bit-exact reference model,
// checks that the outputs hold while en is low, and that reset clears them.
// Full-scale inputs make the output saturation happen; the test counts it.
module tb_radix2_butterfly;
  import ellora_pkg::*;
  import ellora_ref_pkg::*;

  int checks = 0;
  int failures = 0;

  logic  clk = 1'b0;
  logic  rst, en;
  cplx_t xa, xb, w, ya, yb;

  radix2_butterfly dut (.clk(clk), .rst(rst), .en(en), .xa(xa), .xb(xb), .w(w), .ya(ya), .yb(yb));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic ci_t to_ci(cplx_t c);
    ci_t r;
    r.re = int'(c.re);
    r.im = int'(c.im);
    return r;
  endfunction

  function automatic cplx_t rnd(int full);
    cplx_t c;
    if (full != 0) begin
      c.re = ($urandom & 1) ? 16'sh7FFF : 16'sh8000;
      c.im = ($urandom & 1) ? 16'sh7FFF : 16'sh8000;
    end else begin
      c.re = sample_t'($urandom);
      c.im = sample_t'($urandom);
    end
    return c;
  endfunction

  task automatic one(input int full);
    ci_t ra, rb;
    int k;
    k  = int'($urandom % 256);
    xa = rnd(full);
    xb = rnd(full);
    w.re = sample_t'(twiddle(k, 512).re);
    w.im = sample_t'(twiddle(k, 512).im);
    en = 1'b1;
    bfly(to_ci(xa), to_ci(xb), to_ci(w), ra, rb);
    @(posedge clk);
    #1;
    checks++;
    if (int'(ya.re) != ra.re || int'(ya.im) != ra.im || int'(yb.re) != rb.re || int'(yb.im) != rb.im) begin
      failures++;
      if (failures < 10)
        $display("FAIL xa=(%0d,%0d) xb=(%0d,%0d) w=(%0d,%0d): ya=(%0d,%0d) yb=(%0d,%0d) expected (%0d,%0d) (%0d,%0d)",
                 xa.re, xa.im, xb.re, xb.im, w.re, w.im, ya.re, ya.im, yb.re, yb.im, ra.re, ra.im, rb.re, rb.im);
    end
  endtask

  initial begin
    cplx_t hold_a, hold_b;
    rst = 1'b1; en = 1'b0; xa = '0; xb = '0; w = '0;
    repeat (2) @(posedge clk);
    #1;
    rst = 1'b0;
    checks++;
    if (ya != '0 || yb != '0) failures++;

    // Known values: W = 1, Xa = 1000, Xb = 200 -> Ya = 600, Yb = 400.
    xa = '{re: 16'sd1000, im: -16'sd1000};
    xb = '{re: 16'sd200,  im: 16'sd0};
    w  = '{re: 16'sd16384, im: 16'sd0};
    en = 1'b1;
    @(posedge clk); #1;
    checks++;
    if (ya.re != 16'sd600 || ya.im != -16'sd500 || yb.re != 16'sd400 || yb.im != -16'sd500) failures++;
    // W = i: W*Xb = (0, 200) -> Ya = (500, -400), Yb = (500, -600).
    w = '{re: 16'sd0, im: 16'sd16384};
    @(posedge clk); #1;
    checks++;
    if (ya.re != 16'sd500 || ya.im != -16'sd400 || yb.re != 16'sd500 || yb.im != -16'sd600) failures++;

    for (int i = 0; i < 3000; i++) one(0);
    sat_count = 0;
    for (int i = 0; i < 200; i++) one(1);
    $display("saturations exercised: %0d", sat_count);
    checks++;
    if (sat_count == 0) failures++;

    // Hold with en low.
    hold_a = ya; hold_b = yb;
    en = 1'b0;
    xa = rnd(0); xb = rnd(0);
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (ya != hold_a || yb != hold_b) failures++;

    // Synchronous reset clears.
    rst = 1'b1;
    @(posedge clk); #1;
    checks++;
    if (ya != '0 || yb != '0) failures++;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
