// tb_reshuffle: self-checking test of the reshuffle network at N = 16.
// Every input and every fed-back Ya/Yb carries a unique tag. For each stage
// the expected routing is rebuilt with the textbook loop of an in-place
// decimation-in-time transform (groups of size 2^(s+1), butterflies counted
// group by group), and the tags seen at Xa, Xb, tf_sel and Y_out are
// compared with it.
module tb_reshuffle;
  import ellora_pkg::*;

  localparam int unsigned N = 16;
  localparam int unsigned LOG_N = 4;
  localparam int unsigned SW = $clog2(LOG_N + 1);
  localparam int unsigned AW = $clog2(N / 2);

  int checks = 0;
  int failures = 0;

  logic [SW-1:0] stage;
  cplx_t         x_in   [N];
  cplx_t         ya     [N/2];
  cplx_t         yb     [N/2];
  cplx_t         xa     [N/2];
  cplx_t         xb     [N/2];
  logic [AW-1:0] tf_sel [N/2];
  cplx_t         y_out  [N];

  reshuffle #(.N(N)) dut (.stage(stage), .x_in(x_in), .ya(ya), .yb(yb), .xa(xa), .xb(xb),
                          .tf_sel(tf_sel), .y_out(y_out));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rev4(int v);
    return ((v & 1) << 3) | ((v & 2) << 1) | ((v & 4) >> 1) | ((v & 8) >> 3);
  endfunction

  // Tags: x_in[i] = 1000 + i, ya[j] = 2000 + j, yb[j] = 3000 + j.
  // zmap[p] = tag now at working position p.
  int zmap [N];

  task automatic check_tag(input int got, input int want, input string what, input int s, input int j);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 20) $display("FAIL stage %0d %s[%0d]: got %0d want %0d", s, what, j, got, want);
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) x_in[i] = '{re: sample_t'(1000 + i), im: sample_t'(-(1000 + i))};
    for (int j = 0; j < N / 2; j++) begin
      ya[j] = '{re: sample_t'(2000 + j), im: sample_t'(-(2000 + j))};
      yb[j] = '{re: sample_t'(3000 + j), im: sample_t'(-(3000 + j))};
    end
    // Stage 0 reads the input in bit-reversed order.
    for (int p = 0; p < N; p++) zmap[p] = 1000 + rev4(p);
    for (int s = 0; s < LOG_N; s++) begin
      int size, half, c;
      stage = SW'(s);
      #1;
      size = 2 << s;
      half = 1 << s;
      c = 0;
      for (int base = 0; base < N; base += size) begin
        for (int m = 0; m < half; m++) begin
          check_tag(int'(xa[c].re), zmap[base + m], "xa", s, c);
          check_tag(-int'(xa[c].im), zmap[base + m], "xa.im", s, c);
          check_tag(int'(xb[c].re), zmap[base + m + half], "xb", s, c);
          check_tag(int'(tf_sel[c]), m * (N / size), "tf_sel", s, c);
          c++;
        end
      end
      // After this stage, butterfly c's Ya/Yb hold its two positions.
      c = 0;
      for (int base = 0; base < N; base += size) begin
        for (int m = 0; m < half; m++) begin
          zmap[base + m] = 2000 + c;
          zmap[base + m + half] = 3000 + c;
          c++;
        end
      end
    end
    // Output in natural order from the last stage.
    for (int p = 0; p < N; p++) check_tag(int'(y_out[p].re), zmap[p], "y_out", LOG_N, p);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
