// rpc_top_tb: end-to-end test of the RPC unit at its default parameters (K = 7, 4-entry buffer).
//
// A behavioural single-precision FPU (fp32_fpu_model) executes a random stream of add, sub,
// mul, div and sqrt operations; the RPC unit snoops its issue port and checks every result.
// About a third of the results are corrupted by flipping one or two random bits. Every verdict
// is compared with rpc_tb_pkg::rpc_ref, a double-precision model of the checking rules, in
// mode, Diff, error and suppression, and its latency (2 cycles after the result) is checked.
// On top of that the paper's two claims are checked directly:
//   * an uncorrupted, checkable result never raises an error (the Diff bounds hold);
//   * a corrupted result of a forward check (SSADD/DSSUB, mul) is always caught when a flipped
//     bit lies at least 3 places above the checker's least significant bit.
// Each mechanism (six check modes, the four exception suppressions, non-standard operands,
// the exponent-mismatch corner case, detections, buffer-full stalls) must occur at least once.
module rpc_top_tb;
  import rpc_pkg::*;
  import rpc_tb_pkg::*;

  localparam int K      = 7;        // the RPC unit's default
  localparam int N_OPS  = 20000;
  localparam int MAX_CYC = 400000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        issue_valid, issue_ready;
  fpu_op_e     issue_op;
  logic [31:0] issue_a, issue_b, issue_flip;
  logic        res_valid;
  logic [31:0] res_c;
  fpu_flags_t  res_flags;
  logic        chk_valid, chk_error, chk_unchecked;
  logic signed [8+K:0] chk_diff;
  chk_mode_e   chk_mode;
  logic [2:0]  buf_count;

  rpc_top dut (
    .clk, .rst_n,
    .issue_valid, .issue_ready, .issue_op, .issue_a, .issue_b,
    .res_valid, .res_c, .res_flags,
    .chk_valid, .chk_error, .chk_unchecked, .chk_diff, .chk_mode, .buf_count
  );

  fp32_fpu_model fpu (
    .clk, .rst_n,
    .in_valid (issue_valid && issue_ready),
    .in_op    (issue_op),
    .in_a     (issue_a),
    .in_b     (issue_b),
    .in_flip  (issue_flip),
    .out_valid(res_valid),
    .out_c    (res_c),
    .out_flags(res_flags)
  );

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- stimulus ----------------
  function automatic logic [31:0] rnd_special();
    case ($urandom % 4)
      0: return {1'($urandom), 8'h00, 23'($urandom) | 23'd1};   // denorm
      1: return {1'($urandom), 8'hFF, 23'd0};                   // infinity
      2: return {1'($urandom), 8'hFF, 23'($urandom) | 23'd1};   // NaN
      default: return {1'($urandom), 31'd0};                    // zero
    endcase
  endfunction

  task automatic gen(output fpu_op_e op, output logic [31:0] a, output logic [31:0] b);
    int sel = int'($urandom % 100);
    op = fpu_op_e'($urandom % 5);
    a  = rand_f32(100, 154);
    b  = rand_f32(100, 154);
    if (sel < 25 && (op == OP_ADD || op == OP_SUB)) begin
      // close magnitudes: cancellation, exercises reverse checking
      b = {1'($urandom), a[30:23], a[22:0] ^ 23'($urandom % 512)};
      if ($urandom % 8 == 0) b[30:0] = a[30:0];
    end else if (sel < 35) begin
      a = rand_f32(1, 254);
      b = rand_f32(1, 254);
    end else if (sel < 40) begin
      op = OP_MUL; a = rand_f32(200, 254); b = rand_f32(200, 254);      // overflow
    end else if (sel < 45) begin
      op = OP_MUL; a = rand_f32(1, 60);    b = rand_f32(1, 60);         // underflow
    end else if (sel < 48) begin
      op = OP_SQRT; b[31] = 1'b1;                                       // invalid
    end else if (sel < 51) begin
      op = OP_DIV; b = {1'($urandom), 31'd0};                           // divide by zero
    end else if (sel < 55) begin
      if ($urandom % 2) a = rnd_special(); else b = rnd_special();
    end
    if (op == OP_SQRT && sel >= 48) b[31] = 1'b0;
  endtask

  typedef struct {
    fpu_op_e     op;
    logic [31:0] a, b, flip;
  } issued_t;
  issued_t issued_q[$];
  longint  res_cyc_q[$];
  struct { fpu_op_e op; logic [31:0] a, b, c, flip; fpu_flags_t f; } pend_q[$];

  // counters of mechanisms
  int n_mode [6];
  int n_ovf = 0, n_unf = 0, n_inv = 0, n_dz = 0, n_nonstd = 0, n_unchecked = 0;
  int n_corner = 0, n_detect = 0, n_undetected = 0, n_stall = 0, n_full = 0, n_done = 0;
  int n_diff_nz = 0;

  // drive the issue port
  int n_issued = 0;
  initial begin
    fpu_op_e op;
    logic [31:0] a, b;
    issue_valid = 0; issue_op = OP_ADD; issue_a = 0; issue_b = 0; issue_flip = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // inputs change at falling edges; issue_ready is stable there for the next rising edge
    while (n_issued < N_OPS) begin
      gen(op, a, b);
      // bursts of divisions keep several long operations in flight and fill the buffer
      if ((n_issued / 64) % 8 == 3) op = ($urandom % 2) ? OP_DIV : OP_SQRT;
      issue_valid = 1'b1;
      issue_op    = op;
      issue_a     = a;
      issue_b     = b;
      issue_flip  = ($urandom % 3 == 0) ? ((32'd1 << ($urandom % 32)) |
                                           (($urandom % 4 == 0) ? (32'd1 << ($urandom % 32)) : 0))
                                        : 32'd0;
      while (!issue_ready) begin
        n_stall++;
        @(negedge clk);
      end
      @(negedge clk);
      n_issued++;
      if ($urandom % 4 == 0) begin
        issue_valid = 1'b0;
        @(negedge clk);
      end
    end
    issue_valid = 1'b0;
  end

  // record accepted operations and results
  always @(posedge clk) if (rst_n) begin
    if (issue_valid && issue_ready)
      issued_q.push_back('{op: issue_op, a: issue_a, b: issue_b, flip: issue_flip});
    if (buf_count == 3'd4) n_full++;
    if (res_valid) begin
      issued_t it;
      it = issued_q.pop_front();
      pend_q.push_back('{op: it.op, a: it.a, b: it.b, c: res_c, flip: it.flip, f: res_flags});
      res_cyc_q.push_back(cyc);
    end
  end

  // check every verdict
  always @(posedge clk) if (rst_n && chk_valid) begin
    int mode, diff;
    bit supp, err, corner;
    longint rc;
    int fbit;
    bit guaranteed;
    automatic int thr = 23 - K + 3;
    fpu_op_e op;
    logic [31:0] a, b, c, flip;
    fpu_flags_t f;
    op = pend_q[0].op; a = pend_q[0].a; b = pend_q[0].b; c = pend_q[0].c;
    flip = pend_q[0].flip; f = pend_q[0].f;
    void'(pend_q.pop_front());
    rc = res_cyc_q.pop_front();
    rpc_ref(int'(op), a, b, c, f, K, mode, supp, err, diff, corner);

    checks++;
    if (cyc != rc + 2) begin
      failures++;
      $display("latency: result at %0d, verdict at %0d", rc, cyc);
    end
    checks++;
    if (chk_unchecked != supp || (!supp && (chk_error != err || int'(chk_mode) != mode ||
                                             int'(chk_diff) != diff))) begin
      failures++;
      if (failures < 20)
        $display("mismatch op=%0d a=%h b=%h c=%h fl=%b: got unchk=%0d err=%0d mode=%0d diff=%0d exp unchk=%0d err=%0d mode=%0d diff=%0d",
                 op, a, b, c, f, chk_unchecked, chk_error, chk_mode, chk_diff, supp, err, mode, diff);
    end
    if (supp) begin
      // a suppressed check must never raise an error
      checks++;
      if (chk_error) begin
        failures++;
        $display("error flagged on an unchecked result op=%0d c=%h", op, c);
      end
      n_unchecked++;
      if (f.overflow) n_ovf++;
      if (f.underflow) n_unf++;
      if (f.invalid) n_inv++;
      if (f.div_by_zero) n_dz++;
      if (f == '0) n_nonstd++;
    end else begin
      n_mode[mode]++;
      if (corner) n_corner++;
      if (flip == 0) begin
        // the paper's bound: no false alarm on a correct result
        checks++;
        if (chk_error) begin
          failures++;
          $display("false alarm op=%0d a=%h b=%h c=%h diff=%0d", op, a, b, c, chk_diff);
        end
        if (chk_diff != 0) n_diff_nz++;
      end else begin
        if (chk_error) n_detect++; else n_undetected++;
        guaranteed = 0;
        for (fbit = thr; fbit < 32; fbit++)
          if (flip[fbit]) guaranteed = 1;
        if (guaranteed && (mode == 0 || mode == 3)) begin
          checks++;
          if (!chk_error) begin
            failures++;
            $display("missed large error op=%0d a=%h b=%h c=%h flip=%h", op, a, b, c, flip);
          end
        end
      end
    end
    n_done++;
  end

  task automatic need(input string what, input int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    wait (n_issued == N_OPS);
    wait (n_done == N_OPS);
    repeat (5) @(posedge clk);
    checks++;
    if (pend_q.size() != 0 || issued_q.size() != 0) failures++;
    need("forward add/sub check", n_mode[0]);
    need("reverse check recovering A", n_mode[1]);
    need("reverse check recovering B", n_mode[2]);
    need("forward multiply check", n_mode[3]);
    need("reverse divide check", n_mode[4]);
    need("reverse square-root check", n_mode[5]);
    need("overflow suppression", n_ovf);
    need("underflow suppression", n_unf);
    need("invalid suppression", n_inv);
    need("divide-by-zero suppression", n_dz);
    need("non-standard operand suppression", n_nonstd);
    need("exponent mismatch corner case", n_corner);
    need("error detected", n_detect);
    need("buffer full stall", n_stall);
    $display("modes fwd_add=%0d rev_a=%0d rev_b=%0d fwd_mul=%0d rev_div=%0d rev_sqrt=%0d",
             n_mode[0], n_mode[1], n_mode[2], n_mode[3], n_mode[4], n_mode[5]);
    $display("unchecked=%0d (ovf=%0d unf=%0d inv=%0d dz=%0d nonstd=%0d) corner=%0d",
             n_unchecked, n_ovf, n_unf, n_inv, n_dz, n_nonstd, n_corner);
    $display("injected: detected=%0d undetected=%0d; fault-free nonzero Diff=%0d; stall cycles=%0d full cycles=%0d",
             n_detect, n_undetected, n_diff_nz, n_stall, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (MAX_CYC) @(posedge clk);
    failures++;
    $display("watchdog expired after %0d cycles", MAX_CYC);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
