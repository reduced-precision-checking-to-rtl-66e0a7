// rp_fpu: the reduced-precision (9+K)-bit floating point unit of the checker.
//
// It holds one (9+K)-bit adder/subtractor, shared by the addition and subtraction checks, and
// one (9+K)-bit multiplier, shared by the multiplication, division and square-root checks, and
// returns the result of the one the check mode selects. Combinational.
//
// What follows the paper: exactly one adder/subtractor and one multiplier, shared this way.
// This design's own choices: the unused unit's operands are held at zero (operand isolation,
// so it does not toggle), and in the square-root check the product C^H x C^H takes the sign of
// C, so that sqrt(-0) = -0 checks against B = -0 (the paper does not discuss signed zeros).
module rp_fpu
  import rpc_pkg::*;
#(
  parameter int unsigned K = 7
) (
  input  chk_mode_e    mode,
  input  logic [8+K:0] x,
  input  logic [8+K:0] y,
  input  logic         sub,
  output logic [8+K:0] r
);
  logic         use_mul;
  logic [8+K:0] add_x, add_y, add_r, mul_x, mul_y, mul_r;

  always_comb begin
    use_mul = mode inside {CHK_FWD_MUL, CHK_REV_DIV, CHK_REV_SQRT};
    add_x   = use_mul ? '0 : x;
    add_y   = use_mul ? '0 : y;
    mul_x   = use_mul ? x : '0;
    mul_y   = use_mul ? y : '0;
  end

  rp_addsub #(.K(K)) u_add (.a(add_x), .b(add_y), .sub(sub), .y(add_r));
  rp_mul    #(.K(K)) u_mul (.a(mul_x), .b(mul_y), .y(mul_r));

  always_comb begin
    if (!use_mul)                r = add_r;
    else if (mode == CHK_REV_SQRT) r = {x[8+K], mul_r[7+K:0]};
    else                         r = mul_r;
  end

endmodule
