// twiddle_rom: read-only table of the IFFT twiddle factors with one
// combinational read port per butterfly.
//
// Entry k (0 <= k < N/2) holds W_N^-k = cos(2*pi*k/N) + i*sin(2*pi*k/N),
// i.e. the twiddle W_N = exp(-i*2*pi/N) raised to -k as the inverse
// transform needs. Both parts are rounded to the nearest Q1.14 value
// (round(16384*cos), round(16384*sin)). The values are computed at
// elaboration time from $cos/$sin, so the table follows N without any data
// file. The paper specifies a ROM of precomputed sine and cosine values
// addressed by tf_sel; the number format and the one-port-per-butterfly
// organisation are this design's choices.
//
// Timing: purely combinational, w[j] = table[tf_sel[j]].
module twiddle_rom
  import ellora_pkg::*;
#(
  parameter int unsigned N     = 512,         // transform size
  parameter int unsigned PORTS = N / 2,       // read ports (one per butterfly)
  parameter int unsigned AW    = $clog2(N / 2)
) (
  input  logic [AW-1:0] tf_sel [PORTS],
  output cplx_t         w      [PORTS]
);

  localparam real PI = 3.14159265358979323846;

  function automatic sample_t to_q14(real v);
    real scaled;
    scaled = v * real'(1 << TW_FRAC);
    // Round half away from zero.
    if (scaled >= 0.0) return sample_t'($rtoi(scaled + 0.5));
    else               return sample_t'(-$rtoi(-scaled + 0.5));
  endfunction

  cplx_t table_q [N/2];

  for (genvar k = 0; k < N / 2; k++) begin : g_entry
    localparam sample_t COS_K = to_q14($cos(2.0 * PI * real'(k) / real'(N)));
    localparam sample_t SIN_K = to_q14($sin(2.0 * PI * real'(k) / real'(N)));
    assign table_q[k] = '{re: COS_K, im: SIN_K};
  end

  always_comb begin
    for (int unsigned j = 0; j < PORTS; j++) w[j] = table_q[tf_sel[j]];
  end

endmodule
