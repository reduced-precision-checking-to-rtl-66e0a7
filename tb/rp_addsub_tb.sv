// rp_addsub_tb: self-checking test of the checker adder/subtractor.
//
// Three instances run side by side, at K = 7 (default, 16-bit checker), K = 1 (10-bit, the
// narrowest width the paper evaluates) and K = 23 (32-bit, the widest). Each gets random
// operands: close exponents (cancellation), far exponents (sticky rounding), zeros, results near
// the bottom and top of the exponent range, and directed ties. Every output is compared with
// the double-precision sum rounded to the narrow format by rpc_tb_pkg::real_to_rp.
module rp_addsub_tb;
  import rpc_tb_pkg::*;

  localparam int NK = 3;
  localparam int KS [NK] = '{7, 1, 23};
  localparam int N  = 20000;

  int checks = 0, failures = 0;
  bit done [NK];

  for (genvar gi = 0; gi < NK; gi++) begin : g_k
    localparam int K = KS[gi];
    logic [8+K:0] a, b, y;
    logic         sub;
    rp_addsub #(.K(K)) dut (.a(a), .b(b), .sub(sub), .y(y));

    function automatic logic [8+K:0] rnd_op(input int base);
      logic [7:0] ex;
      int sel = int'($urandom % 16);
      if (sel == 0) return {1'($urandom), {(8+K){1'b0}}};
      if (sel < 10) ex = 8'(base + int'($urandom % 3) - 1);
      else if (sel < 14) ex = 8'(1 + $urandom % 254);
      else ex = 8'(base + int'($urandom % 40) - 20);
      if (ex == 0) ex = 1;
      if (ex == 8'hFF) ex = 8'hFE;
      return {1'($urandom), ex, K'($urandom)};
    endfunction

    initial begin
      logic [31:0] exp_w;
      real ra, rb;
      int base;
      #1;
      for (int n = 0; n < N; n++) begin
        base = (n % 5 == 0) ? 2 : (n % 5 == 1) ? 253 : 2 + int'($urandom % 250);
        a   = rnd_op(base);
        b   = rnd_op(base);
        if (n % 7 == 0) b = {b[8+K], a[7+K:0]};  // equal magnitudes
        sub = 1'($urandom);
        #1;
        ra = rp_to_real(32'(a), K);
        rb = rp_to_real(32'(b), K);
        exp_w = real_to_rp(sub ? ra - rb : ra + rb, K);
        checks++;
        if (32'(y) != exp_w) begin
          failures++;
          if (failures < 10)
            $display("K=%0d a=%h b=%h sub=%0d got=%h exp=%h", K, a, b, sub, y, exp_w);
        end
      end
      done[gi] = 1;
    end
  end

  initial begin
    wait (done[0] && done[1] && done[2]);
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
