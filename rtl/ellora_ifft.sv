// ellora_ifft: fully parallel radix-2 decimation-in-time N-point IFFT core
// (N = 512 by default: 32 OFDM subcarriers x 16 symbols).
//
// The core holds N/2 butterflies, so a whole stage of the transform is
// computed in one clock cycle and an N-point IFFT takes log2(N) cycles
// (9 for N = 512). Blocks, as in the core's microarchitecture:
//   ifft_ctrl        enable, stage counter, done = (counter == log2(N))
//   reshuffle        routes X_in (stage 0) or the fed-back Ya/Yb (later
//                    stages) to the butterfly inputs, selects the twiddle
//                    index per butterfly, and assembles Y_out
//   twiddle_rom      precomputed cosine/sine table, one port per butterfly
//   radix2_butterfly N/2 instances; each computes Ya = Xa + W*Xb and
//                    Yb = Xa - W*Xb with 4 multipliers and 6 adders and
//                    holds Ya, Yb in flip-flops
//
// Arithmetic: 16-bit signed complex samples, Q1.14 twiddles, a divide by 2
// in every stage (this design's choice), so y_out = (1/N) * sum_k x_in[k] *
// exp(+i*2*pi*k*n/N) up to rounding, i.e. the inverse DFT with its 1/N.
//
// Interface and timing:
//   start  - one-cycle request; x_in must be valid in that cycle only
//   done   - rises log2(N) rising edges after the start edge and stays high,
//            with y_out valid, until the next start
//   rst    - synchronous, active high
module ellora_ifft
  import ellora_pkg::*;
#(
  parameter int unsigned N     = 512,
  parameter int unsigned LOG_N = $clog2(N),
  parameter int unsigned SW    = $clog2(LOG_N + 1),
  parameter int unsigned AW    = $clog2(N / 2)
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  start,
  output logic  done,
  input  cplx_t x_in  [N],
  output cplx_t y_out [N]
);

  logic          en;
  logic [SW-1:0] stage;
  cplx_t         xa     [N/2];
  cplx_t         xb     [N/2];
  cplx_t         ya     [N/2];
  cplx_t         yb     [N/2];
  cplx_t         w      [N/2];
  logic [AW-1:0] tf_sel [N/2];

  ifft_ctrl #(.LOG_N(LOG_N), .SW(SW)) u_ctrl (
    .clk   (clk),
    .rst   (rst),
    .start (start),
    .en    (en),
    .stage (stage),
    .done  (done)
  );

  reshuffle #(.N(N), .LOG_N(LOG_N), .SW(SW), .AW(AW)) u_reshuffle (
    .stage  (stage),
    .x_in   (x_in),
    .ya     (ya),
    .yb     (yb),
    .xa     (xa),
    .xb     (xb),
    .tf_sel (tf_sel),
    .y_out  (y_out)
  );

  twiddle_rom #(.N(N), .PORTS(N / 2), .AW(AW)) u_twiddle (
    .tf_sel (tf_sel),
    .w      (w)
  );

  for (genvar j = 0; j < N / 2; j++) begin : g_bfly
    radix2_butterfly u_bfly (
      .clk (clk),
      .rst (rst),
      .en  (en),
      .xa  (xa[j]),
      .xb  (xb[j]),
      .w   (w[j]),
      .ya  (ya[j]),
      .yb  (yb[j])
    );
  end

endmodule
