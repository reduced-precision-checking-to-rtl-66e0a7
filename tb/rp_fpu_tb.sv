// rp_fpu_tb: self-checking test of the checker FP unit (adder and multiplier behind one port).
//
// For every check mode, random reduced-precision operands are applied and the output is
// compared with the double-precision reference: the sum or difference for the add/sub modes,
// the product for the multiply modes, and for the square-root mode the product with the sign
// of the first operand.
module rp_fpu_tb;
  import rpc_pkg::*;
  import rpc_tb_pkg::*;

  localparam int K = 7;
  localparam int N = 20000;

  chk_mode_e    mode;
  logic [8+K:0] x, y, r;
  logic         sub;

  rp_fpu #(.K(K)) dut (.mode, .x, .y, .sub, .r);

  int checks = 0, failures = 0;
  int n_mode [6];

  initial begin
    logic [31:0] e;
    real rx, ry;
    for (int n = 0; n < N; n++) begin
      mode = chk_mode_e'($urandom % 6);
      x    = {1'($urandom), 8'(60 + $urandom % 130), K'($urandom)};
      y    = {1'($urandom), 8'(60 + $urandom % 130), K'($urandom)};
      if (n % 5 == 0) y = {y[8+K], x[7+K:K], K'($urandom)};
      sub  = 1'($urandom);
      #1;
      rx = rp_to_real(32'(x), K);
      ry = rp_to_real(32'(y), K);
      case (mode)
        CHK_FWD_ADD, CHK_REV_A, CHK_REV_B: e = real_to_rp(sub ? rx - ry : rx + ry, K);
        CHK_REV_SQRT: begin
          e = real_to_rp(rx * ry, K);
          e[8+K] = x[8+K];
        end
        default: e = real_to_rp(rx * ry, K);
      endcase
      n_mode[int'(mode)]++;
      checks++;
      if (32'(r) != e) begin
        failures++;
        if (failures < 10) $display("mode=%0d x=%h y=%h sub=%0d r=%h exp=%h", mode, x, y, sub, r, e);
      end
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
