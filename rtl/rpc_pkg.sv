// rpc_pkg: types and constants shared by the reduced precision checking (RPC) unit.
//
// RPC checks a 32-bit IEEE-754 FPU with a second, narrow floating point unit. The narrow
// format keeps the sign, the 8 exponent bits and only the K most significant fraction bits,
// so a checker word is 9+K bits: X^H = X[31:23-K]. The checker result is compared with the
// matching 9+K bits of the FPU by an integer subtraction (Diff) and a fixed window:
// [-1,1] for add/sub and [-1,3] for mul, div and sqrt. Those bounds are the paper's.
// K = 7 (a 16-bit checker) is the default, the configuration the paper uses as its example;
// the paper evaluates checker widths 10..32, i.e. K = 1..23.
package rpc_pkg;

  // FPU operation, as issued to the full-precision FPU (encoding is this design's choice).
  typedef enum logic [2:0] {
    OP_ADD  = 3'd0,
    OP_SUB  = 3'd1,
    OP_MUL  = 3'd2,
    OP_DIV  = 3'd3,
    OP_SQRT = 3'd4
  } fpu_op_e;

  // How one result is checked (Sec. 3.2, 6, 7 of the paper).
  typedef enum logic [2:0] {
    CHK_FWD_ADD = 3'd0,  // SSADD / DSSUB: A^H +/- B^H -> C', compare with C^H
    CHK_REV_A   = 3'd1,  // SSSUB / DSADD, result recovers A: C^H +/- B^H -> A', compare with A^H
    CHK_REV_B   = 3'd2,  // SSSUB / DSADD, result recovers B: A^H - C^H or C^H - A^H -> B'
    CHK_FWD_MUL = 3'd3,  // A^H x B^H -> C', compare with C^H
    CHK_REV_DIV = 3'd4,  // C^H x B^H -> A', compare with A^H
    CHK_REV_SQRT= 3'd5   // C^H x C^H -> B', compare with B^H
  } chk_mode_e;

  // Exception flags reported by the full-precision FPU (Sec. 9.1).
  typedef struct packed {
    logic overflow;
    logic underflow;
    logic invalid;
    logic div_by_zero;
  } fpu_flags_t;

  // Diff window, inclusive, proved in Sec. 5-7 of the paper.
  localparam int DIFF_LB        = -1;
  localparam int DIFF_UB_ADDSUB = 1;
  localparam int DIFF_UB_MULDIV = 3;

  // IEEE single-precision field helpers.
  // x is a single-precision word without its sign bit
  function automatic logic is_nonstandard32(input logic [30:0] x);
    // denorm, infinity or NaN (the paper's "non-standard operand")
    return (x[30:23] == 8'hFF) || (x[30:23] == 8'h00 && x[22:0] != 23'd0);
  endfunction

endpackage
