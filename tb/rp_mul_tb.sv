// rp_mul_tb: self-checking test of the checker multiplier.
//
// Instances at K = 7 (default), K = 1 and K = 23 multiply random reduced-precision operands,
// including zeros and products that overflow or fall to the bottom of the exponent range, and
// every product is compared with the double-precision product rounded to the narrow format.
module rp_mul_tb;
  import rpc_tb_pkg::*;

  localparam int NK = 3;
  localparam int KS [NK] = '{7, 1, 23};
  localparam int N  = 20000;

  int checks = 0, failures = 0;
  bit done [NK];

  for (genvar gi = 0; gi < NK; gi++) begin : g_k
    localparam int K = KS[gi];
    logic [8+K:0] a, b, y;
    rp_mul #(.K(K)) dut (.a(a), .b(b), .y(y));

    function automatic logic [8+K:0] rnd_op(input int lo, input int hi);
      logic [7:0] ex;
      if ($urandom % 20 == 0) return {1'($urandom), {(8+K){1'b0}}};
      ex = 8'(lo + int'($urandom % 32'(hi - lo + 1)));
      return {1'($urandom), ex, K'($urandom)};
    endfunction

    initial begin
      logic [31:0] exp_w;
      #1;
      for (int n = 0; n < N; n++) begin
        case (n % 4)
          0: begin a = rnd_op(1, 254);   b = rnd_op(1, 254);   end
          1: begin a = rnd_op(100, 150); b = rnd_op(100, 150); end
          2: begin a = rnd_op(1, 70);    b = rnd_op(50, 70);   end  // near underflow
          default: begin a = rnd_op(190, 254); b = rnd_op(120, 135); end  // near overflow
        endcase
        #1;
        exp_w = real_to_rp(rp_to_real(32'(a), K) * rp_to_real(32'(b), K), K);
        checks++;
        if (32'(y) != exp_w) begin
          failures++;
          if (failures < 10) $display("K=%0d a=%h b=%h got=%h exp=%h", K, a, b, y, exp_w);
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
