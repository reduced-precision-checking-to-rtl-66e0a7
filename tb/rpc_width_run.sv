// rpc_width_run: one checker width of the error-injection sweep (used by rpc_sweep_tb).
//
// An RPC unit with K fraction bits checks a behavioural FPU. For each of the five operations it
// runs N_IN random operand pairs twice: once fault-free, where no error may be flagged, and
// once with one random bit of the result flipped. Every verdict must also match rpc_tb_pkg's
// reference model. The corrupted runs are sorted the way the paper sorts its injections:
// detected (UMD), undetected (UMUD) and unchecked because checking was suppressed (UMUC);
// for UMUD results the relative error is compared with the approximate maximum percentage
// error max|Diff| * 2^-K (1 for add/sub, 3 otherwise).
module rpc_width_run
  import rpc_pkg::*;
  import rpc_tb_pkg::*;
#(
  parameter int K    = 7,
  parameter int N_IN = 1000
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  logic        issue_valid, issue_ready, res_valid, chk_valid, chk_error, chk_unchecked;
  fpu_op_e     issue_op;
  logic [31:0] issue_a, issue_b, issue_flip, res_c;
  fpu_flags_t  res_flags;
  logic signed [8+K:0] chk_diff;
  chk_mode_e   chk_mode;
  logic [2:0]  buf_count;

  rpc_top #(.K(K)) dut (
    .clk, .rst_n, .issue_valid, .issue_ready, .issue_op, .issue_a, .issue_b,
    .res_valid, .res_c, .res_flags,
    .chk_valid, .chk_error, .chk_unchecked, .chk_diff, .chk_mode, .buf_count
  );

  fp32_fpu_model fpu (
    .clk, .rst_n, .in_valid(issue_valid && issue_ready), .in_op(issue_op), .in_a(issue_a),
    .in_b(issue_b), .in_flip(issue_flip), .out_valid(res_valid), .out_c(res_c),
    .out_flags(res_flags)
  );

  logic [31:0] c_seen;
  fpu_flags_t  f_seen;
  always @(posedge clk) if (res_valid) begin
    c_seen <= res_c;
    f_seen <= res_flags;
  end

  initial begin
    int umd [5], umud [5], umuc [5], over [5];
    int mode, diff;
    bit supp, err, corner;
    real rc, re, pe, mpe;
    done = 0; checks = 0; failures = 0;
    issue_valid = 0; issue_op = OP_ADD; issue_a = 0; issue_b = 0; issue_flip = 0;
    for (int o = 0; o < 5; o++) begin umd[o] = 0; umud[o] = 0; umuc[o] = 0; over[o] = 0; end
    wait (rst_n);
    for (int o = 0; o < 5; o++) begin
      for (int pass = 0; pass < 2; pass++) begin
        for (int n = 0; n < N_IN; n++) begin
          @(negedge clk);
          issue_op   = fpu_op_e'(o);
          issue_a    = rand_f32(64, 190);
          issue_b    = rand_f32(64, 190);
          if (o == int'(OP_SQRT)) issue_b[31] = 1'b0;
          issue_flip = (pass == 1) ? (32'd1 << ($urandom % 32)) : 32'd0;
          issue_valid = 1'b1;
          @(negedge clk);
          issue_valid = 1'b0;
          @(posedge chk_valid);
          #1;
          rpc_ref(o, issue_a, issue_b, c_seen, f_seen, K, mode, supp, err, diff, corner);
          checks++;
          if (chk_unchecked != supp || chk_error != (err && !supp)) begin
            failures++;
            $display("K=%0d op=%0d a=%h b=%h c=%h: verdict differs from reference", K, o,
                     issue_a, issue_b, c_seen);
          end
          if (pass == 0 && !supp) begin
            checks++;
            if (chk_error) begin
              failures++;
              $display("K=%0d op=%0d a=%h b=%h c=%h: false alarm, Diff=%0d", K, o, issue_a,
                       issue_b, c_seen, chk_diff);
            end
          end
          if (pass == 1) begin
            if (supp) umuc[o]++;
            else if (chk_error) umd[o]++;
            else begin
              umud[o]++;
              rc  = f32_to_real(c_seen ^ issue_flip);
              re  = f32_to_real(c_seen);
              pe  = (re - rc) / rc;
              if (pe < 0.0) pe = -pe;
              mpe = ((o < 2) ? 1.0 : 3.0) * pow2(-K);
              if (pe > mpe) over[o]++;
            end
          end
        end
      end
      // every width must catch some corrupted results of every operation
      checks++;
      if (umd[o] == 0) begin
        failures++;
        $display("K=%0d op=%0d: no injected error detected", K, o);
      end
    end
    $display("width %2d: UMD/UMUD/UMUC (>MPE) add %0d/%0d/%0d (%0d) sub %0d/%0d/%0d (%0d) mul %0d/%0d/%0d (%0d) div %0d/%0d/%0d (%0d) sqrt %0d/%0d/%0d (%0d)",
             9 + K, umd[0], umud[0], umuc[0], over[0], umd[1], umud[1], umuc[1], over[1],
             umd[2], umud[2], umuc[2], over[2], umd[3], umud[3], umuc[3], over[3],
             umd[4], umud[4], umuc[4], over[4]);
    done = 1;
  end
endmodule
