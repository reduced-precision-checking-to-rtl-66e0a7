// check_ctrl_tb: self-checking test of the check-mode selection.
//
// Random operations with all sign combinations are given a correctly rounded result C (computed
// here in double precision). Two independent checks are made on every decision:
//   * rule check: mode, operands, add/sub, reference and window against the table of the
//     paper's forward and reverse checks, written out per case;
//   * value check: evaluating the chosen computation on the chosen operands in double precision
//     must land within 4 checker ulps of the chosen reference; a wrong operand, sign or
//     direction lands far away.
// Suppression is checked for each exception flag and for non-standard operands and results.
module check_ctrl_tb;
  import rpc_pkg::*;
  import rpc_tb_pkg::*;

  localparam int K = 7;
  localparam int N = 20000;

  fpu_op_e      op;
  logic [8+K:0] a_h, b_h, x, y, ref_w;
  logic         nonstd_ops, sub, muldiv, suppress;
  logic [31:0]  c;
  fpu_flags_t   flags;
  chk_mode_e    mode;

  check_ctrl #(.K(K)) dut (.op, .a_h, .b_h, .nonstd_ops, .c, .flags, .mode, .x, .y, .sub,
                           .ref_w, .muldiv, .suppress);

  int checks = 0, failures = 0;
  int n_mode [6];

  task automatic fail(input string what);
    failures++;
    if (failures < 15)
      $display("%s: op=%0d a_h=%h b_h=%h c=%h mode=%0d x=%h y=%h sub=%0d ref=%h", what, op, a_h,
               b_h, c, mode, x, y, sub, ref_w);
  endtask

  initial begin
    logic [31:0] a, b;
    logic [8+K:0] ch;
    chk_mode_e em;
    logic [8+K:0] ex, ey, er;
    logic esub;
    real rv, rr;
    bit sa, sb, sc;
    for (int n = 0; n < N; n++) begin
      op = fpu_op_e'($urandom % 5);
      a  = rand_f32(110, 140);
      b  = rand_f32(110, 140);
      if (n % 3 == 0) b[30:23] = a[30:23];
      if (op == OP_SQRT) b[31] = 1'b0;
      case (op)
        OP_ADD:  c = real_to_f32(f32_to_real(a) + f32_to_real(b));
        OP_SUB:  c = real_to_f32(f32_to_real(a) - f32_to_real(b));
        OP_MUL:  c = real_to_f32(f32_to_real(a) * f32_to_real(b));
        OP_DIV:  c = real_to_f32(f32_to_real(a) / f32_to_real(b));
        default: c = real_to_f32($sqrt(f32_to_real(b)));
      endcase
      a_h = a[31:23-K];
      b_h = b[31:23-K];
      ch  = c[31:23-K];
      nonstd_ops = 1'b0;
      flags = '0;
      #1;
      // rule table
      sa = a[31]; sb = b[31]; sc = c[31];
      em = CHK_FWD_ADD; ex = a_h; ey = b_h; esub = 0; er = ch;
      if (op == OP_ADD && sa == sb)      begin em = CHK_FWD_ADD; end
      else if (op == OP_SUB && sa != sb) begin em = CHK_FWD_ADD; esub = 1; end
      else if (op == OP_ADD && sa == sc) begin em = CHK_REV_A; ex = ch;  ey = b_h; esub = 1; er = a_h; end
      else if (op == OP_ADD)             begin em = CHK_REV_B; ex = ch;  ey = a_h; esub = 1; er = b_h; end
      else if (op == OP_SUB && sa == sc) begin em = CHK_REV_A; ex = ch;  ey = b_h; esub = 0; er = a_h; end
      else if (op == OP_SUB)             begin em = CHK_REV_B; ex = a_h; ey = ch;  esub = 1; er = b_h; end
      else if (op == OP_MUL)             begin em = CHK_FWD_MUL; end
      else if (op == OP_DIV)             begin em = CHK_REV_DIV;  ex = ch; ey = b_h; er = a_h; end
      else                               begin em = CHK_REV_SQRT; ex = ch; ey = ch;  er = b_h; end
      checks++;
      if (mode != em || x != ex || y != ey || ref_w != er || suppress ||
          muldiv != (op inside {OP_MUL, OP_DIV, OP_SQRT}) ||
          (!muldiv && sub != esub)) fail("rule");
      n_mode[int'(mode)]++;
      // value check
      if (muldiv) rv = rp_to_real(32'(x), K) * rp_to_real(32'(y), K);
      else        rv = sub ? rp_to_real(32'(x), K) - rp_to_real(32'(y), K)
                           : rp_to_real(32'(x), K) + rp_to_real(32'(y), K);
      rr = rp_to_real(32'(ref_w), K);
      checks++;
      if (((rv - rr) < 0.0 ? rr - rv : rv - rr) >
          4.0 * pow2(int'(ref_w[7+K:K]) - 127 - K)) fail("value");
      // suppression: each flag, a non-standard operand, a non-standard result
      for (int s = 0; s < 6; s++) begin
        flags = (s < 4) ? fpu_flags_t'(4'b1 << s) : '0;
        nonstd_ops = (s == 4);
        if (s == 5) c = {c[31], 8'hFF, 23'd0};
        #1;
        checks++;
        if (!suppress) fail("suppress");
      end
    end
    for (int i = 0; i < 6; i++) begin
      checks++;
      if (n_mode[i] == 0) begin
        failures++;
        $display("mode %0d never chosen", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
