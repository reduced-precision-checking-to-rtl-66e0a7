// diff_compare_tb: self-checking test of the Diff comparison.
//
// Random reference/checker word pairs, most of them within a few units of each other and some
// with opposite signs or far apart, are fed with both windows. The expected Diff and verdict
// are worked out with plain integer arithmetic on the 8+K low bits. The window edges
// (Diff = -2, -1, 1, 2, 3, 4) are each driven directly.
module diff_compare_tb;
  localparam int K = 7;
  localparam int N = 20000;

  logic [8+K:0]        ref_w, chk_w;
  logic                muldiv;
  logic signed [8+K:0] diff;
  logic                error;

  diff_compare #(.K(K)) dut (.ref_w, .chk_w, .muldiv, .diff, .error);

  int checks = 0, failures = 0;

  task automatic check_one();
    int  d, ub;
    bit  e;
    #1;
    d  = int'(ref_w[7+K:0]) - int'(chk_w[7+K:0]);
    ub = muldiv ? 3 : 1;
    e  = (ref_w[8+K] != chk_w[8+K]) || d < -1 || d > ub;
    checks++;
    if (int'(diff) != d || error != e) begin
      failures++;
      if (failures < 10)
        $display("ref=%h chk=%h muldiv=%0d: diff=%0d err=%0d, expected %0d %0d",
                 ref_w, chk_w, muldiv, diff, error, d, e);
    end
  endtask

  initial begin
    int off;
    // the window edges, both windows
    for (int m = 0; m < 2; m++)
      for (off = -3; off <= 5; off++) begin
        muldiv = 1'(m);
        ref_w  = {1'b0, 8'd130, K'(40)};
        chk_w  = ref_w - (9+K)'(off);
        check_one();
      end
    for (int n = 0; n < N; n++) begin
      muldiv = 1'($urandom);
      ref_w  = (9+K)'($urandom);
      case ($urandom % 4)
        0: chk_w = (9+K)'($urandom);
        1: chk_w = {~ref_w[8+K], ref_w[7+K:0]};
        default: chk_w = {ref_w[8+K], ref_w[7+K:0] + (8+K)'(int'($urandom % 9) - 4)};
      endcase
      check_one();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
