// tb_twiddle_rom: self-checking test of the twiddle table at N = 512.
// Every entry is read through every port position used; values are
// compared with exact known points (k = 0, N/8, N/4, 3N/8) and with a
// floating-point cos/sin to within half a Q1.14 step.
module tb_twiddle_rom;
  import ellora_pkg::*;

  localparam int unsigned N  = 512;
  localparam int unsigned P  = N / 2;
  localparam int unsigned AW = $clog2(N / 2);

  int checks = 0;
  int failures = 0;

  logic [AW-1:0] sel [P];
  cplx_t         w   [P];

  twiddle_rom #(.N(N)) dut (.tf_sel(sel), .w(w));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rot = 0; rot < 4; rot++) begin
      for (int j = 0; j < P; j++) sel[j] = AW'((j * 37 + rot * 61) % P);
      #1;
      for (int j = 0; j < P; j++) begin
        int k;
        real ang, er, ei;
        k = (j * 37 + rot * 61) % P;
        ang = 2.0 * 3.14159265358979323846 * real'(k) / real'(N);
        er = real'(w[j].re) / 16384.0 - $cos(ang);
        ei = real'(w[j].im) / 16384.0 - $sin(ang);
        checks++;
        if (er > 0.5 / 16384.0 + 1e-9 || er < -0.5 / 16384.0 - 1e-9 ||
            ei > 0.5 / 16384.0 + 1e-9 || ei < -0.5 / 16384.0 - 1e-9) begin
          failures++;
          if (failures < 10) $display("FAIL k=%0d w=(%0d,%0d)", k, w[j].re, w[j].im);
        end
      end
    end
    // Exact points.
    sel[0] = AW'(0); sel[1] = AW'(N / 4); sel[2] = AW'(N / 8); sel[3] = AW'(3 * N / 8);
    #1;
    checks++;
    if (w[0].re != 16'sd16384 || w[0].im != 16'sd0) failures++;
    checks++;
    if (w[1].re != 16'sd0 || w[1].im != 16'sd16384) failures++;
    checks++;  // cos(pi/4) * 16384 = 11585.24
    if (w[2].re != 16'sd11585 || w[2].im != 16'sd11585) failures++;
    checks++;
    if (w[3].re != -16'sd11585 || w[3].im != 16'sd11585) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
