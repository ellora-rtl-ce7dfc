// radix2_butterfly: one radix-2 butterfly of the IFFT core,
//   Ya = Xa + W*Xb,   Yb = Xa - W*Xb,
// with both results held in flip-flops that feed the next stage.
//
// As in the paper, the complex multiply-accumulate is built from exactly four
// multipliers and six adders, all 16-bit signed units that can be swapped for
// approximate circuits with the same ports:
//   multipliers  Xb.re*W.re, Xb.im*W.im, Xb.re*W.im, Xb.im*W.re
//   adders 1, 2  (W*Xb).re = rr - ii,   (W*Xb).im = ri + ir
//   adders 3..6  Ya.re, Ya.im (sums) and Yb.re, Yb.im (differences)
// A subtraction is done by the adder itself as a + ~b + 1.
//
// Fixed-point scaling (this design's choice; the paper gives only the
// 16-bit width): W is Q1.14. Each product is shifted right by 15 instead of
// 14 and Xa is shifted right by 1 (arithmetic shifts, i.e. rounding toward
// minus infinity), so every stage computes (Xa +/- W*Xb) / 2 and a full
// log2(N)-stage transform carries the 1/N factor of the inverse DFT. The
// 17-bit adder results are saturated back to 16 bits; with every operand
// halved this only happens for inputs near full scale in both parts.
//
// Timing: combinational from xa, xb, w to the registers; ya/yb update on the
// rising clock edge when en is high and hold otherwise. rst is synchronous,
// active high, and clears both outputs.
module radix2_butterfly
  import ellora_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  logic  en,
  input  cplx_t xa,
  input  cplx_t xb,
  input  cplx_t w,
  output cplx_t ya,
  output cplx_t yb
);

  localparam int unsigned PW = 2 * DATA_W;

  // Four multipliers.
  logic signed [PW-1:0] m_rr, m_ii, m_ri, m_ir;

  bewm_multiplier #(.W(DATA_W)) u_mul_rr (.a(xb.re), .b(w.re), .p(m_rr));
  bewm_multiplier #(.W(DATA_W)) u_mul_ii (.a(xb.im), .b(w.im), .p(m_ii));
  bewm_multiplier #(.W(DATA_W)) u_mul_ri (.a(xb.re), .b(w.im), .p(m_ri));
  bewm_multiplier #(.W(DATA_W)) u_mul_ir (.a(xb.im), .b(w.re), .p(m_ir));

  // Products scaled by 2^-(TW_FRAC+1); |product| <= 2^29 so 16 bits hold them.
  sample_t t_rr, t_ii, t_ri, t_ir;
  logic signed [PW-1:0] s_rr, s_ii, s_ri, s_ir;

  assign s_rr = m_rr >>> (TW_FRAC + 1);
  assign s_ii = m_ii >>> (TW_FRAC + 1);
  assign s_ri = m_ri >>> (TW_FRAC + 1);
  assign s_ir = m_ir >>> (TW_FRAC + 1);
  assign t_rr = s_rr[DATA_W-1:0];
  assign t_ii = s_ii[DATA_W-1:0];
  assign t_ri = s_ri[DATA_W-1:0];
  assign t_ir = s_ir[DATA_W-1:0];

  // Adders 1 and 2: half of the complex product W*Xb.
  logic signed [DATA_W:0] sum_pr, sum_pi;
  cplx_t prod;

  cla_adder #(.W(DATA_W)) u_add_pr (.a(t_rr), .b(~t_ii), .cin(1'b1), .sum(sum_pr));
  cla_adder #(.W(DATA_W)) u_add_pi (.a(t_ri), .b(t_ir),  .cin(1'b0), .sum(sum_pi));

  assign prod.re = sat1(sum_pr);
  assign prod.im = sat1(sum_pi);

  // Half of Xa.
  cplx_t half_a;
  assign half_a.re = xa.re >>> 1;
  assign half_a.im = xa.im >>> 1;

  // Adders 3 to 6.
  logic signed [DATA_W:0] sum_ar, sum_ai, dif_br, dif_bi;

  cla_adder #(.W(DATA_W)) u_add_ar (.a(half_a.re), .b(prod.re),  .cin(1'b0), .sum(sum_ar));
  cla_adder #(.W(DATA_W)) u_add_ai (.a(half_a.im), .b(prod.im),  .cin(1'b0), .sum(sum_ai));
  cla_adder #(.W(DATA_W)) u_sub_br (.a(half_a.re), .b(~prod.re), .cin(1'b1), .sum(dif_br));
  cla_adder #(.W(DATA_W)) u_sub_bi (.a(half_a.im), .b(~prod.im), .cin(1'b1), .sum(dif_bi));

  always_ff @(posedge clk) begin
    if (rst) begin
      ya <= '0;
      yb <= '0;
    end else if (en) begin
      ya.re <= sat1(sum_ar);
      ya.im <= sat1(sum_ai);
      yb.re <= sat1(dif_br);
      yb.im <= sat1(dif_bi);
    end
  end

endmodule
