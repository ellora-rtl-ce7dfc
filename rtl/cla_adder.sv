// cla_adder: W-bit signed carry-lookahead adder with carry-in and a W+1 bit
// sign-extended sum.
//
// This is the accurate adder of the butterfly. The accurate reference pair of
// the design is a carry-lookahead adder with a Booth-encoded Wallace
// multiplier, chosen because long ripple-carry chains do not close timing at
// 100 MHz; the internal organisation below is this design's own.
//
// Structure: bit generate g = a & b and propagate p = a ^ b; the bits are
// split into groups of GROUP bits. Inside a group every carry is written in
// flattened lookahead form from g, p and the group carry-in. Each group also
// forms a group generate G and group propagate P, and a second lookahead
// level computes every group carry-in directly from G, P and cin. The extra
// MSB of the sum is the signed extension a[W-1] ^ b[W-1] ^ carry-out, so
// sum = a + b + cin holds exactly as signed W+1 bit numbers.
// Subtraction a - b is obtained by the user as a + ~b with cin = 1.
//
// Purely combinational; no clock.
module cla_adder #(
  parameter int unsigned W     = 16,  // operand width
  parameter int unsigned GROUP = 4    // bits per lookahead group
) (
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  input  logic                cin,
  output logic signed [W:0]   sum
);

  localparam int unsigned NG = (W + GROUP - 1) / GROUP;  // number of groups

  logic [W-1:0]  g, p;
  logic [W:0]    c;        // c[i] is the carry into bit i, c[W] the carry-out
  logic [NG-1:0] gg, gp;   // group generate / propagate
  logic [NG:0]   gc;       // carry into each group

  assign g = a & b;
  assign p = a ^ b;

  // Group generate and propagate terms.
  always_comb begin
    for (int unsigned k = 0; k < NG; k++) begin
      logic term;
      gg[k] = 1'b0;
      gp[k] = 1'b1;
      for (int unsigned i = k * GROUP; i < (k + 1) * GROUP && i < W; i++) begin
        gp[k] = gp[k] & p[i];
      end
      for (int unsigned i = k * GROUP; i < (k + 1) * GROUP && i < W; i++) begin
        term = g[i];
        for (int unsigned m = i + 1; m < (k + 1) * GROUP && m < W; m++) term = term & p[m];
        gg[k] = gg[k] | term;
      end
    end
  end

  // Second level: every group carry directly from cin, G and P.
  always_comb begin
    for (int unsigned k = 0; k <= NG; k++) begin
      logic term;
      term = cin;
      for (int unsigned m = 0; m < k; m++) term = term & gp[m];
      gc[k] = term;
      for (int unsigned j = 0; j < k; j++) begin
        term = gg[j];
        for (int unsigned m = j + 1; m < k; m++) term = term & gp[m];
        gc[k] = gc[k] | term;
      end
    end
  end

  // First level: bit carries inside each group from the group carry-in.
  always_comb begin
    for (int unsigned i = 0; i < W; i++) begin
      int unsigned base;
      logic term;
      base = (i / GROUP) * GROUP;
      term = gc[i / GROUP];
      for (int unsigned m = base; m < i; m++) term = term & p[m];
      c[i] = term;
      for (int unsigned j = base; j < i; j++) begin
        term = g[j];
        for (int unsigned m = j + 1; m < i; m++) term = term & p[m];
        c[i] = c[i] | term;
      end
    end
    c[W] = gc[NG];
  end

  assign sum[W-1:0] = p ^ c[W-1:0];
  assign sum[W]     = a[W-1] ^ b[W-1] ^ c[W];

endmodule
