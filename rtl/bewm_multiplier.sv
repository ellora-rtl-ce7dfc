// bewm_multiplier: W x W signed Booth-encoded Wallace-tree multiplier with a
// full 2W-bit product.
//
// This is the accurate multiplier of the butterfly (16-bit signed operands).
// The paper names the circuit type only; the organisation below is this
// design's own, built the textbook way:
//  * Radix-4 (modified) Booth encoding of the multiplier b: W/2 digits
//    d_i in {-2,-1,0,1,2}, taken from bits b[2i+1], b[2i], b[2i-1]
//    (b[-1] = 0).
//  * Partial product i is d_i * a shifted by 2i. A negative digit is formed
//    as the one's complement of |d_i| * a plus a 1 at bit 2i; those 1s are
//    collected into one extra correction row.
//  * The W/2 + 1 rows are reduced with layers of 3:2 carry-save adders
//    (Wallace reduction at row level) until two rows remain.
//  * The last two rows are added by a 2W-bit carry-lookahead adder.
// Purely combinational; no clock. W must be even.
module bewm_multiplier #(
  parameter int unsigned W = 16
) (
  input  logic signed [W-1:0]   a,
  input  logic signed [W-1:0]   b,
  output logic signed [2*W-1:0] p
);

  localparam int unsigned PW    = 2 * W;     // product width
  localparam int unsigned NDIG  = W / 2;     // Booth digits
  localparam int unsigned NROWS = NDIG + 1;  // partial products + correction row

  logic [PW-1:0] rows [NROWS];

  // Booth encoding and partial product generation.
  always_comb begin
    logic [PW-1:0] a_ext, mag;
    logic          b_lo, b_mid, b_hi, neg;
    a_ext = PW'(a);                  // sign-extended multiplicand
    rows[NDIG] = '0;
    for (int unsigned i = 0; i < NDIG; i++) begin
      b_hi  = b[2*i+1];
      b_mid = b[2*i];
      b_lo  = (i == 0) ? 1'b0 : b[2*i-1];
      neg   = b_hi & ~(b_mid & b_lo);
      unique case ({b_hi, b_mid, b_lo})
        3'b001, 3'b010, 3'b101, 3'b110: mag = a_ext;
        3'b011, 3'b100:                 mag = a_ext << 1;
        default:                        mag = '0;
      endcase
      rows[i] = (neg ? ~mag : mag) << (2 * i);
      // Shifting the one's complement leaves zeros below bit 2i, so
      // -(|d|*a << 2i) is this row plus a 1 at bit 2i.
      if (neg) rows[NDIG][2*i] = 1'b1;
    end
  end

  // Wallace reduction: repeatedly compress groups of three rows into two.
  logic [PW-1:0] sum_row, carry_row;

  always_comb begin
    logic [PW-1:0] work [NROWS];
    logic [PW-1:0] next [NROWS];
    int unsigned   n, m;
    for (int unsigned r = 0; r < NROWS; r++) work[r] = rows[r];
    for (int unsigned r = 0; r < NROWS; r++) next[r] = '0;
    n = NROWS;
    while (n > 2) begin
      m = 0;
      for (int unsigned r = 0; r + 2 < n; r += 3) begin
        next[m]     = work[r] ^ work[r+1] ^ work[r+2];
        next[m + 1] = ((work[r] & work[r+1]) | (work[r] & work[r+2]) |
                       (work[r+1] & work[r+2])) << 1;
        m += 2;
      end
      for (int unsigned r = (n / 3) * 3; r < n; r++) begin
        next[m] = work[r];
        m += 1;
      end
      for (int unsigned r = 0; r < NROWS; r++) work[r] = next[r];
      n = m;
    end
    sum_row   = work[0];
    carry_row = work[1];
  end

  logic signed [PW:0] final_sum;

  cla_adder #(.W(PW)) u_final_add (
    .a   (sum_row),
    .b   (carry_row),
    .cin (1'b0),
    .sum (final_sum)
  );

  assign p = final_sum[PW-1:0];

endmodule
