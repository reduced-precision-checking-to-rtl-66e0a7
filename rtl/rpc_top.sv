// rpc_top: reduced precision checking (RPC) unit for a 32-bit IEEE-754 FPU.
//
// The unit sits beside a full-precision FPU (not part of this RTL) and checks every result
// that FPU produces with a (9+K)-bit floating point unit. It snoops the FPU's issue port,
// keeps the truncated operands A^H = A[31:23-K] and B^H = B[31:23-K] in operand_buffer,
// and when the FPU returns the result C and its exception flags:
//   cycle 0  check_ctrl picks forward or reverse checking, the checker operands and the
//            reference; these are registered together with the Diff window (result buffer);
//   cycle 1  rp_fpu computes the reduced-precision result and diff_compare tests it against
//            the reference; the verdict is registered;
//   cycle 2  chk_valid is high for one cycle with chk_error (result outside the error-free
//            window: an error in the FPU or in the checker) or chk_unchecked (the check was
//            suppressed because of an exception or a non-standard operand).
// One result can be accepted per cycle, so the checker keeps up with the FPU.
//
// Interfaces:
//   issue_*  one cycle per operation the FPU accepts: op, A, B. issue_ready is low while the
//            operand buffer is full; the FPU must not accept an operation then.
//   res_*    one cycle per FPU result: C and the four exception flags. Results must come in
//            issue order.
//   chk_*    the verdict, 2 cycles after res_valid, in result order; chk_diff and chk_mode
//            say how the verdict was reached.
//
// What follows the paper: the checker structure (one (9+K)-bit adder/subtractor, one (9+K)-bit
// multiplier, checking logic, operand buffers), forward/reverse checking, the integer Diff
// test with windows [-1,1] and [-1,3], waiting for the FPU before checking, and suppressing
// checks on exceptions. This design's own choices: the handshakes, the two register stages,
// the buffer depth and the stall on a full buffer.
module rpc_top
  import rpc_pkg::*;
#(
  parameter int unsigned K         = 7,   // checker fraction bits (checker width 9+K)
  parameter int unsigned BUF_DEPTH = 4    // operations the FPU may have in flight
) (
  input  logic          clk,
  input  logic          rst_n,
  // issue side of the full-precision FPU
  input  logic          issue_valid,
  output logic          issue_ready,
  input  fpu_op_e       issue_op,
  input  logic [31:0]   issue_a,
  input  logic [31:0]   issue_b,
  // result side of the full-precision FPU
  input  logic          res_valid,
  input  logic [31:0]   res_c,
  input  fpu_flags_t    res_flags,
  // verdict
  output logic          chk_valid,
  output logic          chk_error,
  output logic          chk_unchecked,
  output logic signed [8+K:0] chk_diff,
  output chk_mode_e     chk_mode,
  output logic [$clog2(BUF_DEPTH+1)-1:0] buf_count
);
  typedef struct packed {
    fpu_op_e      op;
    logic [8+K:0] a_h;
    logic [8+K:0] b_h;
    logic         nonstd;
  } buf_entry_t;

  buf_entry_t issue_entry, head;
  logic       head_valid;

  always_comb begin
    issue_entry.op     = issue_op;
    issue_entry.a_h    = issue_a[31:23-K];
    issue_entry.b_h    = issue_b[31:23-K];
    // square root reads only B
    issue_entry.nonstd = is_nonstandard32(issue_b[30:0]) ||
                         (issue_op != OP_SQRT && is_nonstandard32(issue_a[30:0]));
  end

  operand_buffer #(.T(buf_entry_t), .DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n,
    .push_valid (issue_valid),
    .push_ready (issue_ready),
    .push_data  (issue_entry),
    .pop_valid  (head_valid),
    .pop_ready  (res_valid),
    .pop_data   (head),
    .count      (buf_count)
  );

  // ---- stage 0: decide how to check ----
  chk_mode_e    mode0;
  logic [8+K:0] x0, y0, ref0;
  logic         sub0, muldiv0, suppress0;

  check_ctrl #(.K(K)) u_ctrl (
    .op        (head.op),
    .a_h       (head.a_h),
    .b_h       (head.b_h),
    .nonstd_ops(head.nonstd),
    .c         (res_c),
    .flags     (res_flags),
    .mode      (mode0),
    .x         (x0),
    .y         (y0),
    .sub       (sub0),
    .ref_w     (ref0),
    .muldiv    (muldiv0),
    .suppress  (suppress0)
  );

  // ---- stage 1 registers: checker operands and reference (loaded only on a result) ----
  logic         v1;
  chk_mode_e    mode1;
  logic [8+K:0] x1, y1, ref1;
  logic         sub1, muldiv1, suppress1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= res_valid;
  end

  always_ff @(posedge clk) begin
    if (res_valid) begin
      mode1     <= mode0;
      x1        <= x0;
      y1        <= y0;
      sub1      <= sub0;
      ref1      <= ref0;
      muldiv1   <= muldiv0;
      suppress1 <= suppress0;
    end
  end

  // ---- stage 1: reduced-precision computation and comparison ----
  logic [8+K:0]        r1;
  logic signed [8+K:0] diff1;
  logic                err1;

  rp_fpu #(.K(K)) u_rp (.mode(mode1), .x(x1), .y(y1), .sub(sub1), .r(r1));

  diff_compare #(.K(K)) u_cmp (
    .ref_w (ref1),
    .chk_w (r1),
    .muldiv(muldiv1),
    .diff  (diff1),
    .error (err1)
  );

  // ---- stage 2: verdict ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      chk_valid     <= 1'b0;
      chk_error     <= 1'b0;
      chk_unchecked <= 1'b0;
      chk_diff      <= '0;
      chk_mode      <= CHK_FWD_ADD;
    end else begin
      chk_valid     <= v1;
      chk_error     <= v1 && !suppress1 && err1;
      chk_unchecked <= v1 && suppress1;
      if (v1) begin
        chk_diff <= diff1;
        chk_mode <= mode1;
      end
    end
  end

  // the FPU may not report a result for an operation it was never given
  a_res_has_op: assert property (@(posedge clk) disable iff (!rst_n) res_valid |-> head_valid)
    else $error("rpc_top: FPU result with no outstanding operation");

endmodule
