// rpc_tb_pkg: reference arithmetic for the RPC testbenches, written independently of the RTL.
//
// Values are carried as SystemVerilog reals (IEEE double). A result of a single add, sub,
// mul, div or sqrt on narrow operands, computed in double and then rounded once more to the
// narrow format, equals the correctly rounded narrow result whenever the double has at least
// 2p+2 mantissa bits for a p-bit target (53 >= 2*24+2), so the functions below give exact
// references for every checker width K = 1..23 and for IEEE single precision.
//
// Narrow ("reduced precision") words are passed right-aligned in a 32-bit vector:
// bit 8+k is the sign, bits 7+k:k the exponent field, bits k-1:0 the fraction.
package rpc_tb_pkg;

  // 2**e for -1022 <= e <= 1023, built from the double's exponent field
  function automatic real pow2(input int e);
    return $bitstoreal({1'b0, 11'(e + 1023), 52'd0});
  endfunction

  // exact value of a reduced-precision word (field 0 read as zero, as the checker does)
  function automatic real rp_to_real(input logic [31:0] w, input int k);
    logic       s;
    int         ex;
    real        m;
    s  = w[8+k];
    ex = int'((w >> k) & 32'hFF);
    if (ex == 0) return $bitstoreal({s, 63'd0});
    m  = 1.0 + real'(w & ((32'd1 << k) - 1)) / real'(64'd1 << k);
    m  = m * pow2(ex - 127);
    return s ? -m : m;
  endfunction

  // round a double to a reduced-precision word, nearest even; same clamping rules as the
  // checker: exponent >= 255 -> infinity, exponent 0 -> field 0 with normalised fraction,
  // below -> zero
  function automatic logic [31:0] real_to_rp(input real r, input int k);
    logic [63:0] bits;
    logic        s;
    int          e, sh;
    logic [63:0] mant, kept, rem, half;
    bits = $realtobits(r);
    s    = bits[63];
    if (bits[62:0] == 63'd0) return 32'(s) << (8 + k);
    e    = int'(bits[62:52]) - 1023 + 127;
    mant = {11'd0, 1'b1, bits[51:0]};
    sh   = 52 - k;
    kept = mant >> sh;
    rem  = mant & ((64'd1 << sh) - 1);
    half = 64'd1 << (sh - 1);
    if (rem > half || (rem == half && kept[0])) kept = kept + 1;
    if (kept == (64'd1 << (k + 1))) begin
      kept = kept >> 1;
      e    = e + 1;
    end
    if (e >= 255) return (32'(s) << (8 + k)) | (32'hFF << k);
    if (e < 0)    return 32'(s) << (8 + k);
    return (32'(s) << (8 + k)) | (32'(e) << k) | 32'(kept & ((64'd1 << k) - 1));
  endfunction

  // IEEE single -> double (exact)
  function automatic real f32_to_real(input logic [31:0] x);
    real m;
    if (x[30:23] == 8'hFF)
      return $bitstoreal({x[31], 11'h7FF, x[22:0], 29'd0});
    if (x[30:0] == 31'd0)
      return $bitstoreal({x[31], 63'd0});
    if (x[30:23] == 8'h00)
      m = real'(x[22:0]) * pow2(-149);
    else
      m = (1.0 + real'(x[22:0]) / 8388608.0) * pow2(int'(x[30:23]) - 127);
    return x[31] ? -m : m;
  endfunction

  // double -> IEEE single, round to nearest even, with gradual underflow
  function automatic logic [31:0] real_to_f32(input real r);
    logic [63:0] bits;
    logic        s;
    real         q, fl, fr;
    longint      n;
    bits = $realtobits(r);
    s    = bits[63];
    if (bits[62:52] == 11'h7FF)
      return (bits[51:0] != 0) ? 32'h7FC00000 : {s, 8'hFF, 23'd0};
    if (bits[62:0] == 63'd0) return {s, 31'd0};
    if ((s ? -r : r) < pow2(-126)) begin
      q  = (s ? -r : r) * pow2(149);
      fl = $floor(q);
      fr = q - fl;
      n  = longint'(fl);
      if (fr > 0.5 || (fr == 0.5 && n[0])) n = n + 1;
      return {s, 31'(n)};
    end
    return real_to_rp(r, 23);
  endfunction

  function automatic logic is_nonstd(input logic [31:0] x);
    return (x[30:23] == 8'hFF) || (x[30:23] == 8'h00 && x[22:0] != 23'd0);
  endfunction

  // random normal single-precision number with exponent field in [lo, hi]
  function automatic logic [31:0] rand_f32(input int lo, input int hi);
    logic [7:0] ex;
    ex = 8'(lo + int'($urandom % 32'(hi - lo + 1)));
    return {1'($urandom), ex, 23'($urandom)};
  endfunction

  // Reference verdict of the RPC unit for one FPU result, worked out from the paper's rules
  // with double-precision arithmetic. mode uses the encoding of rpc_pkg::chk_mode_e.
  // corner is set when the checker result's exponent differs from the reference's
  // (the E_C != E_C' corner case of the paper).
  function automatic void rpc_ref(input int op, input logic [31:0] a, input logic [31:0] b,
                                  input logic [31:0] c, input logic [3:0] flags, input int k,
                                  output int mode, output bit suppressed, output bit err,
                                  output int diff, output bit corner);
    logic [31:0] ah, bh, ch, refw, chkw;
    logic        sa, sb, sc;
    real         ra, rb, rc;
    int          ub;
    ah = a >> (23 - k);
    bh = b >> (23 - k);
    ch = c >> (23 - k);
    ra = rp_to_real(ah, k);
    rb = rp_to_real(bh, k);
    rc = rp_to_real(ch, k);
    sa = a[31]; sb = b[31]; sc = c[31];
    suppressed = (flags != 0) || is_nonstd(b) || (op != 4 && is_nonstd(a)) || is_nonstd(c);
    ub = (op >= 2) ? 3 : 1;
    case (op)
      0: if (sa == sb)      begin mode = 0; chkw = real_to_rp(ra + rb, k); refw = ch; end
         else if (sa == sc) begin mode = 1; chkw = real_to_rp(rc - rb, k); refw = ah; end
         else               begin mode = 2; chkw = real_to_rp(rc - ra, k); refw = bh; end
      1: if (sa != sb)      begin mode = 0; chkw = real_to_rp(ra - rb, k); refw = ch; end
         else if (sa == sc) begin mode = 1; chkw = real_to_rp(rc + rb, k); refw = ah; end
         else               begin mode = 2; chkw = real_to_rp(ra - rc, k); refw = bh; end
      2: begin mode = 3; chkw = real_to_rp(ra * rb, k); refw = ch; end
      3: begin mode = 4; chkw = real_to_rp(rc * rb, k); refw = ah; end
      default: begin
        mode = 5;
        chkw = real_to_rp(rc * rc, k);
        chkw[8+k] = sc;
        refw = bh;
      end
    endcase
    diff   = int'(refw & ((32'd1 << (8 + k)) - 1)) - int'(chkw & ((32'd1 << (8 + k)) - 1));
    err    = (refw[8+k] != chkw[8+k]) || diff < -1 || diff > ub;
    corner = ((refw >> k) & 32'hFF) != ((chkw >> k) & 32'hFF);
  endfunction

endpackage
