// rpc_sweep_tb: the error-injection sweep over every checker width the paper evaluates.
//
// Checker widths 10 to 32 bits (K = 1 to 23) run side by side, one rpc_width_run each, with
// 1000 random operand pairs per operation, fault-free and with one flipped result bit. It fails
// if any width raises a false alarm on a correct result, disagrees with the reference model, or
// never detects an injected error of some operation. Per width it prints how many corrupted
// results were detected, undetected or unchecked, and how many undetected ones exceed the
// approximate maximum percentage error.
module rpc_sweep_tb;
  localparam int KMIN = 1;
  localparam int KMAX = 23;
  localparam int NW   = KMAX - KMIN + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic done [NW];
  int   chk  [NW];
  int   fl   [NW];

  for (genvar i = 0; i < NW; i++) begin : g_w
    rpc_width_run #(.K(KMIN + i)) run (.clk, .rst_n, .done(done[i]), .checks(chk[i]),
                                       .failures(fl[i]));
  end

  function automatic bit all_done();
    for (int i = 0; i < NW; i++) if (!done[i]) return 0;
    return 1;
  endfunction

  initial begin
    int checks = 0, failures = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (!all_done()) @(posedge clk);
    for (int i = 0; i < NW; i++) begin
      checks   += chk[i];
      failures += fl[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int checks = 0;
    repeat (1000000) @(posedge clk);
    for (int i = 0; i < NW; i++) checks += chk[i];
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, 1);
    $finish;
  end
endmodule
