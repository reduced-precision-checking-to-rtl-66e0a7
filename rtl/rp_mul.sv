// rp_mul: the checker's (9+K)-bit floating point multiplier.
//
// Computes y = a * b on reduced-precision words {sign, 8-bit exponent (bias 127), K fraction
// bits}, rounded to nearest, ties to even. Purely combinational; the RPC unit registers it.
//
// How it works: the two (K+1)-bit mantissas (implicit one included) are multiplied exactly;
// the product lies in [1,4), so it is normalised by at most one right shift (Sec. 5 of the
// paper), then rounded on its guard bit and the sticky OR of the bits below.
//
// What follows the paper: a single (9+K)-bit multiplier that serves forward checking of
// multiplication and reverse checking of division (C^H x B^H) and square root (C^H x C^H),
// rounded to nearest even (Axiom 5).
// This design's own choices: an exponent field of 0 is read as zero; overflow gives infinity;
// a result exponent field of exactly 0 keeps its normalised fraction with field 0, and a
// smaller one is flushed to zero (see rp_addsub).
module rp_mul #(
  parameter int unsigned K = 7
) (
  input  logic [8+K:0] a,
  input  logic [8+K:0] b,
  output logic [8+K:0] y
);
  localparam int M = K + 1;

  logic               s, zero;
  logic [M-1:0]       ma, mb;
  logic [2*M-1:0]     p, pn;
  logic signed [10:0] e;
  logic [M-1:0]       mant;
  logic [M:0]         mant_r;
  logic               g, st, inc;

  always_comb begin
    s    = a[8+K] ^ b[8+K];
    zero = (a[7+K:K] == 8'd0) || (b[7+K:K] == 8'd0);
    ma   = {1'b1, a[K-1:0]};
    mb   = {1'b1, b[K-1:0]};
    p    = ma * mb;
    e    = 11'(a[7+K:K]) + 11'(b[7+K:K]) - 11'sd127;
    if (p[2*M-1]) begin
      pn = p;
      e  = e + 11'sd1;
    end else begin
      pn = p << 1;
    end
    mant   = pn[2*M-1:M];
    g      = pn[M-1];
    st     = (pn[M-2:0] != '0);
    inc    = g & (st | mant[0]);
    mant_r = {1'b0, mant} + (M+1)'(inc);
    if (mant_r[M]) begin
      mant_r = mant_r >> 1;
      e      = e + 11'sd1;
    end

    if (zero)
      y = {s, {(8+K){1'b0}}};
    else if (e >= 11'sd255)
      y = {s, 8'hFF, {K{1'b0}}};
    else if (e == 11'sd0)
      y = {s, 8'h00, mant_r[K-1:0]};
    else if (e < 11'sd0)
      y = {s, {(8+K){1'b0}}};
    else
      y = {s, e[7:0], mant_r[K-1:0]};
  end

endmodule
