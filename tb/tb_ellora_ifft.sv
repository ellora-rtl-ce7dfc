// tb_ellora_ifft: end-to-end test of the IFFT core at reduced size (N = 64,
// 32 butterflies, 6 stages; the structure is the same as at N = 512).
//
// Each transform drives x_in for the single start cycle, then checks that
// done rises exactly log2(N) clock edges later, that y_out matches a
// bit-exact fixed-point model bit for bit, and that it lies within a few
// LSBs of a floating-point inverse DFT. Mechanisms exercised and counted:
// stage 0 from the input, stages fed back through the reshuffle network,
// back-to-back transforms, a start ignored while busy, done and y_out held
// after completion, output saturation on full-scale input, and a reset in
// the middle of a transform. A mechanism that never happened is a failure.
module tb_ellora_ifft;
  import ellora_pkg::*;
  import ellora_ref_pkg::*;

  localparam int unsigned N = 64;
  localparam int unsigned LOG_N = $clog2(N);

  int checks = 0;
  int failures = 0;

  logic  clk = 1'b0;
  logic  rst, start, done;
  cplx_t x_in  [N];
  cplx_t y_out [N];

  ellora_ifft #(.N(N)) dut (.clk(clk), .rst(rst), .start(start), .done(done), .x_in(x_in), .y_out(y_out));

  always #5 clk = ~clk;

  // Mechanism counters.
  int n_transforms = 0, n_stage0 = 0, n_feedback = 0, n_ignored_start = 0;
  int n_held = 0, n_saturating = 0, n_reset_mid = 0, n_back_to_back = 0;

  always @(posedge clk) begin
    if (!rst && dut.en) begin
      if (dut.stage == 0) n_stage0++;
      else n_feedback++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  ci_t stim [];

  task automatic make_stim(input int kind);
    stim = new[N];
    for (int i = 0; i < N; i++) begin
      case (kind)
        0: begin  // random, complex magnitude below 2^15
          stim[i].re = int'($urandom % 40000) - 20000;
          stim[i].im = int'($urandom % 40000) - 20000;
        end
        1: begin  // single tone at bin 5
          stim[i].re = (i == 5) ? 20000 : 0;
          stim[i].im = 0;
        end
        default: begin  // full scale in both parts: saturates
          stim[i].re = ($urandom & 1) ? 32767 : -32768;
          stim[i].im = ($urandom & 1) ? 32767 : -32768;
        end
      endcase
    end
  endtask

  // Starts a transform with stim (x_in only valid in the start cycle).
  task automatic launch();
    for (int i = 0; i < N; i++) x_in[i] = '{re: sample_t'(stim[i].re), im: sample_t'(stim[i].im)};
    start = 1'b1;
    @(posedge clk); #1;
    start = 1'b0;
    for (int i = 0; i < N; i++) x_in[i] = '{re: sample_t'($urandom), im: sample_t'($urandom)};
  endtask

  // Waits for done, checks latency and results.
  task automatic finish_and_check(input bit bool_float, input int edges_so_far, input bit poke);
    ci_t  want [];
    real  fr [], fi [];
    int   edges;
    int   bad;
    edges = edges_so_far;
    while (!done && edges < 100) begin
      if (poke && edges == 2) begin
        ci_t keep [];
        keep = stim;
        make_stim(0);
        for (int i = 0; i < N; i++) x_in[i] = '{re: sample_t'(stim[i].re), im: sample_t'(stim[i].im)};
        stim = keep;
        start = 1'b1;
        n_ignored_start++;
      end
      @(posedge clk); #1;
      start = 1'b0;
      edges++;
    end
    checks++;
    if (edges != LOG_N) begin
      failures++;
      $display("FAIL latency %0d edges, expected %0d", edges, LOG_N);
    end
    sat_count = 0;
    ifft_fixed(N, stim, want);
    if (sat_count != 0) n_saturating++;
    bad = 0;
    for (int i = 0; i < N; i++)
      if (int'(y_out[i].re) != want[i].re || int'(y_out[i].im) != want[i].im) bad++;
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL %0d of %0d outputs differ from the bit-exact model", bad, N);
    end
    if (bool_float) begin
      idft_real(N, stim, fr, fi);
      bad = 0;
      for (int i = 0; i < N; i++) begin
        real dr, di;
        dr = real'(y_out[i].re) - fr[i];
        di = real'(y_out[i].im) - fi[i];
        if (dr > 2.0 * LOG_N || dr < -2.0 * LOG_N || di > 2.0 * LOG_N || di < -2.0 * LOG_N) bad++;
      end
      checks++;
      if (bad != 0) begin
        failures++;
        $display("FAIL %0d outputs further than %0d LSB from the float IDFT", bad, 2 * LOG_N);
      end
    end
    n_transforms++;
  endtask

  task automatic check_held();
    cplx_t snap [N];
    snap = y_out;
    repeat (4) @(posedge clk);
    #1;
    checks++;
    if (!done || snap != y_out) failures++;
    else n_held++;
  endtask

  initial begin
    rst = 1'b1; start = 1'b0;
    for (int i = 0; i < N; i++) x_in[i] = '0;
    repeat (3) @(posedge clk);
    #1;
    rst = 1'b0;
    checks++;
    if (done) failures++;

    // Single tone: every output has magnitude 20000/64 = 312.5.
    make_stim(1);
    launch();
    finish_and_check(1, 1, 0);
    check_held();

    // Random transforms, some back to back (start in the cycle done is seen).
    for (int t = 0; t < 6; t++) begin
      make_stim(0);
      launch();
      finish_and_check(1, 1, t == 2);
      if (t % 2 == 1) check_held();
      else n_back_to_back++;
    end

    // Full-scale input built to saturate: inputs N/4*r and N/8 + N/4*r
    // (r = 0..3) form the first two 4-point groups of the working vector.
    // Loaded with c*(-i)^r, they leave c0 at position 1 and c1 at position
    // 5 after stage 1; in stage 2 the butterfly on
    // positions 1 and 5 with twiddle exp(i*pi/4) then needs a real part of
    // about 16383 + 23170 and saturates.
    for (int t = 0; t < 2; t++) begin
      int c0r, c0i, c1r, c1i, sg;
      sg = (t == 0) ? 1 : -1;
      c0r = sg * 32767; c0i = 0;
      c1r = sg * 32767; c1i = -sg * 32767;
      stim = new[N];
      for (int i = 0; i < N; i++) stim[i] = '{re: 0, im: 0};
      for (int r = 0; r < 4; r++) begin
        int ar, ai, br, bi, tmp;
        ar = c0r; ai = c0i; br = c1r; bi = c1i;
        for (int q = 0; q < r; q++) begin  // multiply by -i, r times
          tmp = ar; ar = ai; ai = -tmp;
          tmp = br; br = bi; bi = -tmp;
        end
        stim[(N / 4) * r]         = '{re: ar, im: ai};
        stim[(N / 8) + (N / 4) * r] = '{re: br, im: bi};
      end
      launch();
      finish_and_check(0, 1, 0);
    end

    // Reset in the middle of a transform, then a clean transform.
    make_stim(0);
    launch();
    repeat (2) @(posedge clk);
    #1;
    rst = 1'b1;
    @(posedge clk); #1;
    rst = 1'b0;
    checks++;
    if (done || dut.en) failures++;
    else n_reset_mid++;
    make_stim(0);
    launch();
    finish_and_check(1, 1, 0);

    $display("mechanisms: transforms=%0d stage0=%0d feedback_stages=%0d ignored_start=%0d held=%0d back_to_back=%0d saturating=%0d reset_mid=%0d",
             n_transforms, n_stage0, n_feedback, n_ignored_start, n_held, n_back_to_back, n_saturating, n_reset_mid);
    checks++;
    if (n_transforms == 0 || n_stage0 == 0 || n_feedback == 0 || n_ignored_start == 0 ||
        n_held == 0 || n_back_to_back == 0 || n_saturating == 0 || n_reset_mid == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
