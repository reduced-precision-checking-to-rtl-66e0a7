// diff_compare: the RPC comparison of a reference word with the checker's result.
//
// The reference is the 9+K most significant bits of a full-precision value (C^H in forward
// checking, A^H or B^H in reverse checking); the checker result is the (9+K)-bit word the
// reduced-precision unit produced. The two sign bits must be equal, and the remaining 8+K bits
// of each, read as unsigned integers (exponent above fraction), are subtracted:
//   Diff = ref[7+K:0] - chk[7+K:0]
// The result is accepted when LB <= Diff <= UB. Combinational.
//
// What follows the paper: the sign test, the integer subtraction and the windows,
// [-1,1] for addition/subtraction (muldiv = 0) and [-1,3] for multiplication, division and
// square root (muldiv = 1), from the paper's proofs. The paper writes the test as
// LB < Diff < UB with those ranges as the allowed integer values; here the window is
// written inclusively.
module diff_compare
  import rpc_pkg::*;
#(
  parameter int unsigned K = 7
) (
  input  logic [8+K:0]        ref_w,    // reference high part (sign, exponent, K fraction bits)
  input  logic [8+K:0]        chk_w,    // checker result
  input  logic                muldiv,   // 1: window [-1,3], 0: window [-1,1]
  output logic signed [8+K:0] diff,     // integer Diff
  output logic                error     // 1 when the result is outside what an error-free FPU gives
);
  logic sign_ok, in_range;

  always_comb begin
    diff     = $signed({1'b0, ref_w[7+K:0]}) - $signed({1'b0, chk_w[7+K:0]});
    sign_ok  = ref_w[8+K] == chk_w[8+K];
    in_range = (diff >= (9+K)'(DIFF_LB)) &&
               (diff <= (muldiv ? (9+K)'(DIFF_UB_MULDIV) : (9+K)'(DIFF_UB_ADDSUB)));
    error    = !(sign_ok && in_range);
  end

endmodule
