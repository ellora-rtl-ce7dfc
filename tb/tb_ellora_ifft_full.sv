// tb_ellora_ifft_full: the IFFT core at its default size (N = 512) on an
// OFDM radar frame, the periodogram step the core is meant for.
//
// Frame: 32 subcarriers x 16 OFDM symbols (512 values), 960 kHz subcarrier
// spacing, 1.3 us total symbol duration, 30 GHz carrier, one point target
// at 50 m moving at 20 m/s. After the receiver divides the received
// symbols by the transmitted ones, element (symbol m, subcarrier n) is
//   exp(-i*2*pi*n*df*tau) * exp(+i*2*pi*m*Ts*fD) + noise,
// with tau = 2R/c and fD = 2*v*fc/c. The 512 values are laid out symbol
// after symbol (index 32*m + n), scaled to an amplitude of 16000 and given
// additive noise (sum of uniform variables). The flattening
// order and the scaling are this test's choices.
//
// Checks: done exactly log2(512) = 9 clock edges after start; all 512
// outputs bit-exact against the fixed-point model; outputs within a few
// LSBs of a floating-point inverse DFT; and the periodogram peak (largest
// |y|^2) in the same bin as the floating-point one, or in a bin of equal
// power within 2%. Frames are run at every SNR from -5 dB to 10 dB, four per
// point, and the mean range found is printed (peak bin / 16 range cells of
// c / (2 * 32 * df) = 4.88 m).
module tb_ellora_ifft_full;
  import ellora_pkg::*;
  import ellora_ref_pkg::*;

  localparam int unsigned N = 512;
  localparam int unsigned LOG_N = 9;
  localparam int NSC = 32;
  localparam int NSYM = 16;

  int checks = 0;
  int failures = 0;

  logic  clk = 1'b0;
  logic  rst, start, done;
  cplx_t x_in  [N];
  cplx_t y_out [N];

  ellora_ifft dut (.clk(clk), .rst(rst), .start(start), .done(done), .x_in(x_in), .y_out(y_out));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real gauss();
    real s;
    s = 0.0;
    for (int i = 0; i < 12; i++) s += real'($urandom % 65536) / 65536.0;
    return s - 6.0;  // approximately N(0, 1)
  endfunction

  real pi_v = 3.14159265358979323846;
  real c0 = 3.0e8, fc = 30.0e9, df = 960.0e3, ts = 1.3e-6, rng = 50.0, vel = 20.0;
  real amp = 16000.0;
  int  n_frames = 0;

  // Builds one divided frame at the given SNR (dB).
  function automatic void make_frame(input real snr_db, output ci_t stim []);
    real tau, fd, sigma;
    tau = 2.0 * rng / c0;
    fd = 2.0 * vel * fc / c0;
    sigma = amp / $sqrt(2.0 * $pow(10.0, snr_db / 10.0));  // per real part
    stim = new[N];
    for (int m = 0; m < NSYM; m++) begin
      for (int n = 0; n < NSC; n++) begin
        real ph, vr, vi;
        ph = -2.0 * pi_v * real'(n) * df * tau + 2.0 * pi_v * real'(m) * ts * fd;
        vr = amp * $cos(ph) + sigma * gauss();
        vi = amp * $sin(ph) + sigma * gauss();
        if (vr > 32767.0) vr = 32767.0;
        if (vr < -32768.0) vr = -32768.0;
        if (vi > 32767.0) vi = 32767.0;
        if (vi < -32768.0) vi = -32768.0;
        stim[NSC * m + n].re = $rtoi(vr);
        stim[NSC * m + n].im = $rtoi(vi);
      end
    end
  endfunction

  // Runs one frame through the core and checks it; returns the range found.
  task automatic run_frame(input ci_t stim [], output real range_m);
    ci_t want [];
    real fr [], fi [];
    int  edges, bad, pk_hw, pk_ref;
    real best_hw, best_ref, p_ref_at_hw;

    for (int i = 0; i < N; i++) x_in[i] = '{re: sample_t'(stim[i].re), im: sample_t'(stim[i].im)};
    start = 1'b1;
    @(posedge clk); #1;
    start = 1'b0;
    for (int i = 0; i < N; i++) x_in[i] = '0;
    edges = 1;
    while (!done && edges < 100) begin
      @(posedge clk); #1;
      edges++;
    end
    checks++;
    if (edges != LOG_N) begin
      failures++;
      $display("FAIL latency %0d edges, expected %0d", edges, LOG_N);
    end

    ifft_fixed(N, stim, want);
    bad = 0;
    for (int i = 0; i < N; i++)
      if (int'(y_out[i].re) != want[i].re || int'(y_out[i].im) != want[i].im) bad++;
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL %0d outputs differ from the bit-exact model", bad);
    end

    idft_real(N, stim, fr, fi);
    bad = 0;
    best_hw = -1.0; best_ref = -1.0; pk_hw = 0; pk_ref = 0;
    for (int i = 0; i < N; i++) begin
      real dr, di, phw, pref;
      dr = real'(y_out[i].re) - fr[i];
      di = real'(y_out[i].im) - fi[i];
      if (dr > 2.0 * LOG_N || dr < -2.0 * LOG_N || di > 2.0 * LOG_N || di < -2.0 * LOG_N) bad++;
      phw = real'(y_out[i].re) ** 2 + real'(y_out[i].im) ** 2;
      pref = fr[i] ** 2 + fi[i] ** 2;
      if (phw > best_hw) begin best_hw = phw; pk_hw = i; end
      if (pref > best_ref) begin best_ref = pref; pk_ref = i; end
    end
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL %0d outputs further than %0d LSB from the float IDFT", bad, 2 * LOG_N);
    end
    // Same peak as the float periodogram, or a bin of practically equal power.
    p_ref_at_hw = fr[pk_hw] ** 2 + fi[pk_hw] ** 2;
    checks++;
    if (pk_hw != pk_ref && p_ref_at_hw < 0.98 * best_ref) begin
      failures++;
      $display("FAIL periodogram peak at bin %0d, float reference at %0d", pk_hw, pk_ref);
    end
    range_m = real'(pk_hw) / 16.0 * c0 / (2.0 * NSC * df);
    n_frames++;
  endtask

  initial begin
    ci_t stim [];
    real r, sum_r;

    rst = 1'b1; start = 1'b0;
    for (int i = 0; i < N; i++) x_in[i] = '0;
    repeat (2) @(posedge clk);
    #1;
    rst = 1'b0;

    // SNR sweep from -5 dB to 10 dB, four noisy frames per point.
    for (int snr = -5; snr <= 10; snr++) begin
      sum_r = 0.0;
      for (int run = 0; run < 4; run++) begin
        make_frame(real'(snr), stim);
        run_frame(stim, r);
        sum_r += r;
      end
      $display("SNR %0d dB: mean range %0.2f m (target at %0.1f m)", snr, sum_r / 4.0, rng);
    end
    checks++;
    if (n_frames != 64) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
