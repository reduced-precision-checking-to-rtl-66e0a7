// rp_addsub: the checker's (9+K)-bit floating point adder/subtractor.
//
// Computes y = a + b (sub = 0) or y = a - b (sub = 1) on reduced-precision words
// {sign, 8-bit exponent (bias 127), K fraction bits}, rounded to nearest, ties to even.
// Purely combinational; the RPC unit registers its output.
//
// How it works: the operand of larger magnitude is kept, the other is shifted right by the
// exponent difference into a field with guard, round and sticky bits; the two are added or
// subtracted, normalised by one right shift or a leading-zero left shift, and rounded.
//
// What follows the paper: one (9+K)-bit adder/subtractor, shared by add and sub, with
// IEEE round-to-nearest-even (the checker's rounding error is half an ulp, Axiom 5).
// This design's own choices: an exponent field of 0 is read as zero (the RPC unit never checks
// denormal operands); an exact zero difference is +0; a result whose exponent field would
// reach 255 becomes infinity; a result whose exponent field is exactly 0 keeps its normalised
// fraction with field 0 (so the integer Diff against a smallest-normal reference stays small),
// and below that the result is flushed to zero.
module rp_addsub #(
  parameter int unsigned K = 7   // fraction bits kept by the checker
) (
  input  logic [8+K:0] a,
  input  logic [8+K:0] b,
  input  logic         sub,
  output logic [8+K:0] y
);
  localparam int M = K + 1;      // mantissa width including the implicit one

  logic          sa, sb, sl, ss, eff_sub, a_big;
  logic [7:0]    el, es, d;
  logic [M-1:0]  ml, ms;
  logic [M+2:0]  sm_ext, sm_sh, lost_mask;
  logic [M+3:0]  sum;
  logic [M+2:0]  norm;
  logic signed [10:0] e;
  int            lz;
  logic [M-1:0]  mant;
  logic [M:0]    mant_r;
  logic          g, rs, inc;

  always_comb begin
    sa = a[8+K];
    sb = b[8+K] ^ sub;
    a_big = a[7+K:0] >= b[7+K:0];
    sl = a_big ? sa : sb;
    ss = a_big ? sb : sa;
    el = a_big ? a[7+K:K] : b[7+K:K];
    es = a_big ? b[7+K:K] : a[7+K:K];
    ml = a_big ? {a[7+K:K] != 8'd0, a[K-1:0]} : {b[7+K:K] != 8'd0, b[K-1:0]};
    ms = a_big ? {b[7+K:K] != 8'd0, b[K-1:0]} : {a[7+K:K] != 8'd0, a[K-1:0]};
    eff_sub = sl ^ ss;
    d = el - es;

    // align the smaller operand; bits shifted out fold into the sticky (lowest) bit
    sm_ext = {ms, 3'b000};
    if (d > 8'(M + 3)) begin
      sm_sh     = '0;
      lost_mask = '1;
    end else begin
      sm_sh     = sm_ext >> d;
      lost_mask = (M+3)'((1 << d) - 1);
    end
    sm_sh[0] = sm_sh[0] | ((sm_ext & lost_mask) != '0);

    sum = eff_sub ? ({1'b0, ml, 3'b000} - {1'b0, sm_sh})
                  : ({1'b0, ml, 3'b000} + {1'b0, sm_sh});

    // normalise
    e  = 11'(el);
    lz = 0;
    if (sum[M+3]) begin
      norm = {sum[M+3:2], sum[1] | sum[0]};
      e    = e + 11'sd1;
    end else begin
      for (int i = 0; i <= M + 2; i++)
        if (sum[M+2-i] == 1'b0 && lz == i) lz = i + 1;
      norm = sum[M+2:0] << lz;
      e    = e - 11'(lz);
    end

    // round to nearest, ties to even
    mant   = norm[M+2:3];
    g      = norm[2];
    rs     = norm[1] | norm[0];
    inc    = g & (rs | mant[0]);
    mant_r = {1'b0, mant} + (M+1)'(inc);
    if (mant_r[M]) begin
      mant_r = mant_r >> 1;
      e      = e + 11'sd1;
    end

    // pack
    if (sum == '0)
      y = {sl & ~eff_sub, {(8+K){1'b0}}};
    else if (e >= 11'sd255)
      y = {sl, 8'hFF, {K{1'b0}}};
    else if (e == 11'sd0)
      y = {sl, 8'h00, mant_r[K-1:0]};
    else if (e < 11'sd0)
      y = {sl, {(8+K){1'b0}}};
    else
      y = {sl, e[7:0], mant_r[K-1:0]};
  end

endmodule
