// reshuffle: the "reshuffle for next stage" network of the IFFT core.
//
// In stage 0 it feeds the butterflies from the core input X_in, read in
// bit-reversed order as a radix-2 decimation-in-time transform requires.
// In every later stage it feeds them from the registered outputs Ya/Yb of
// the previous stage, routed so that butterfly j of stage s combines working
// positions ia = (j >> s)*2^(s+1) + (j mod 2^s) and ib = ia + 2^s. It also
// produces the twiddle address tf_sel[j] = (j mod 2^s) << (log2(N)-1-s) for
// the twiddle ROM, and assembles the final result Y_out in natural order
// from the outputs of the last stage.
//
// The paper specifies this block's role (routing Ya/Yb to the next stage's
// inputs and selecting twiddles by the stage counter); the wiring pattern
// above is the standard in-place DIT pattern and is this design's choice.
// Every route is fixed, so each butterfly input is a log2(N)-way multiplexer
// selected by the stage number.
//
// Timing: purely combinational. stage is the counter of the control block.
module reshuffle
  import ellora_pkg::*;
#(
  parameter int unsigned N     = 512,
  parameter int unsigned LOG_N = $clog2(N),
  parameter int unsigned SW    = $clog2(LOG_N + 1),  // stage counter width
  parameter int unsigned AW    = $clog2(N / 2)       // twiddle address width
) (
  input  logic [SW-1:0] stage,
  input  cplx_t         x_in   [N],
  input  cplx_t         ya     [N/2],
  input  cplx_t         yb     [N/2],
  output cplx_t         xa     [N/2],
  output cplx_t         xb     [N/2],
  output logic [AW-1:0] tf_sel [N/2],
  output cplx_t         y_out  [N]
);

  // Previous stage's outputs as one vector: Ya at 0..N/2-1, Yb above.
  cplx_t yy [N];

  always_comb begin
    for (int unsigned j = 0; j < N / 2; j++) begin
      yy[j]         = ya[j];
      yy[N / 2 + j] = yb[j];
    end
  end

  // Candidate inputs of every butterfly, one per stage; all indices are
  // elaboration-time constants, so each is plain wiring.
  cplx_t cand_a [N/2][LOG_N];
  cplx_t cand_b [N/2][LOG_N];

  for (genvar j = 0; j < N / 2; j++) begin : g_bfly
    localparam int unsigned IA0 = bit_rev(bfly_a_pos(j, 0), LOG_N);
    localparam int unsigned IB0 = bit_rev(bfly_b_pos(j, 0), LOG_N);
    assign cand_a[j][0] = x_in[IA0];
    assign cand_b[j][0] = x_in[IB0];
    for (genvar s = 1; s < LOG_N; s++) begin : g_stage
      localparam int unsigned IA = ya_yb_loc(bfly_a_pos(j, s), s - 1, N);
      localparam int unsigned IB = ya_yb_loc(bfly_b_pos(j, s), s - 1, N);
      assign cand_a[j][s] = yy[IA];
      assign cand_b[j][s] = yy[IB];
    end

    // Twiddle index of this butterfly in each stage.
    logic [AW-1:0] tw_of_stage [LOG_N];
    for (genvar s = 0; s < LOG_N; s++) begin : g_tw
      assign tw_of_stage[s] = AW'(tw_index(j, s, LOG_N));
    end

    // Stage-selected input pair and twiddle index.
    assign xa[j]     = (stage < SW'(LOG_N)) ? cand_a[j][stage] : cand_a[j][0];
    assign xb[j]     = (stage < SW'(LOG_N)) ? cand_b[j][stage] : cand_b[j][0];
    assign tf_sel[j] = (stage < SW'(LOG_N)) ? tw_of_stage[stage] : '0;
  end

  // Final output in natural order, from the last stage.
  for (genvar p = 0; p < N; p++) begin : g_out
    localparam int unsigned IO = ya_yb_loc(p, LOG_N - 1, N);
    assign y_out[p] = yy[IO];
  end

endmodule
