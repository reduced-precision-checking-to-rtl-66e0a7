// check_ctrl: decides how one FPU result is checked.
//
// Given the operation, the truncated operands A^H and B^H, the FPU result C and its exception
// flags, it picks the check mode, the two checker operands, whether the checker adds or
// subtracts, the reference word the checker result is compared with, and the Diff window.
// Combinational.
//
// Check modes (all from the paper):
//   add, S_A =  S_B (SSADD)          forward  A^H + B^H -> C'   ref C^H
//   sub, S_A != S_B (DSSUB)          forward  A^H - B^H -> C'   ref C^H
//   add, S_A != S_B, S_A = S_C       reverse  C^H - B^H -> A'   ref A^H
//   add, S_A != S_B, S_B = S_C       reverse  C^H - A^H -> B'   ref B^H
//   sub, S_A =  S_B, S_C = S_A       reverse  C^H + B^H -> A'   ref A^H
//   sub, S_A =  S_B, S_C != S_A      reverse  A^H - C^H -> B'   ref B^H
//   mul                              forward  A^H x B^H -> C'   ref C^H
//   div (A / B)                      reverse  C^H x B^H -> A'   ref A^H
//   sqrt (of B)                      reverse  C^H x C^H -> B'   ref B^H
// Reverse checking of same-sign subtraction / different-sign addition avoids the cancellation
// that makes a truncated forward check meaningless; division and square root are reverse
// checked so that they can reuse the checker multiplier.
//
// Checking is suppressed (the result goes unchecked) when the FPU reports overflow, underflow,
// invalid or divide-by-zero, as in the paper. This design also suppresses it when an operand
// or the result is a denormal, infinity or NaN, since the paper's bounds cover only standard
// operands; `nonstd_ops` carries that test of the full operands, made when they were issued.
// The paper names the square-root operand B; here the FPU's square root takes operand B.
module check_ctrl
  import rpc_pkg::*;
#(
  parameter int unsigned K = 7
) (
  input  fpu_op_e      op,
  input  logic [8+K:0] a_h,         // A[31:23-K]
  input  logic [8+K:0] b_h,         // B[31:23-K]
  input  logic         nonstd_ops,  // an operand the operation reads is non-standard
  input  logic [31:0]  c,           // full-precision result
  input  fpu_flags_t   flags,
  output chk_mode_e    mode,
  output logic [8+K:0] x,           // checker operand 1
  output logic [8+K:0] y,           // checker operand 2
  output logic         sub,         // checker adder subtracts (x - y)
  output logic [8+K:0] ref_w,       // reference compared with the checker result
  output logic         muldiv,      // Diff window [-1,3] (1) or [-1,1] (0)
  output logic         suppress     // result is not checked
);
  logic [8+K:0] c_h;
  logic         sa, sb, sc;

  always_comb begin
    c_h = c[31:23-K];
    sa  = a_h[8+K];
    sb  = b_h[8+K];
    sc  = c[31];

    mode  = CHK_FWD_ADD;
    x     = a_h;
    y     = b_h;
    sub   = 1'b0;
    ref_w = c_h;

    unique case (op)
      OP_ADD: begin
        if (sa == sb) begin
          mode = CHK_FWD_ADD;                                   // SSADD
        end else if (sa == sc) begin
          mode = CHK_REV_A;  x = c_h; y = b_h; sub = 1'b1; ref_w = a_h;
        end else begin
          mode = CHK_REV_B;  x = c_h; y = a_h; sub = 1'b1; ref_w = b_h;
        end
      end
      OP_SUB: begin
        if (sa != sb) begin
          mode = CHK_FWD_ADD; sub = 1'b1;                       // DSSUB
        end else if (sa == sc) begin
          mode = CHK_REV_A;  x = c_h; y = b_h; sub = 1'b0; ref_w = a_h;
        end else begin
          mode = CHK_REV_B;  x = a_h; y = c_h; sub = 1'b1; ref_w = b_h;
        end
      end
      OP_MUL:  mode = CHK_FWD_MUL;
      OP_DIV:  begin mode = CHK_REV_DIV;  x = c_h; y = b_h; ref_w = a_h; end
      OP_SQRT: begin mode = CHK_REV_SQRT; x = c_h; y = c_h; ref_w = b_h; end
      default: mode = CHK_FWD_ADD;
    endcase

    muldiv   = (op == OP_MUL) || (op == OP_DIV) || (op == OP_SQRT);
    suppress = flags.overflow || flags.underflow || flags.invalid || flags.div_by_zero ||
               nonstd_ops || is_nonstandard32(c[30:0]) ||
               !(op inside {OP_ADD, OP_SUB, OP_MUL, OP_DIV, OP_SQRT});
  end

endmodule
