// operand_buffer_tb: self-checking test of the operand FIFO at its default depth (4).
//
// Random pushes and pops, with pops requested only when an entry is present, are compared
// cycle by cycle with a queue model: data order, count, push_ready (low only when full and not
// popping), and a push and pop in the same cycle on a full buffer. The buffer must fill up and
// run empty at least once each.
module operand_buffer_tb;
  localparam int DEPTH = 4;
  typedef logic [19:0] data_t;

  logic  clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  push_valid, push_ready, pop_valid, pop_ready;
  data_t push_data, pop_data;
  logic [2:0] count;

  operand_buffer #(.T(data_t)) dut (
    .clk, .rst_n, .push_valid, .push_ready, .push_data,
    .pop_valid, .pop_ready, .pop_data, .count
  );

  int checks = 0, failures = 0, n_full = 0, n_both_full = 0, n_empty = 0;
  data_t model[$];

  initial begin
    bit acc;
    push_valid = 0; pop_ready = 0; push_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      // drive for the next rising edge
      push_valid = ($urandom % 100) < ((cyc / 500) % 2 == 1 ? 80 : 40);
      push_data  = 20'($urandom);
      pop_ready  = (model.size() != 0) && (($urandom % 100) < ((cyc / 500) % 2 == 1 ? 40 : 80));
      #1;
      checks++;
      if (count != 3'(model.size()) || pop_valid != (model.size() != 0) ||
          push_ready != (model.size() < DEPTH || pop_ready) ||
          (model.size() != 0 && pop_data != model[0])) begin
        failures++;
        if (failures < 10)
          $display("cyc %0d: count=%0d model=%0d ready=%0d pop_data=%h exp=%h", cyc, count,
                   model.size(), push_ready, pop_data, (model.size() != 0) ? model[0] : 20'd0);
      end
      if (model.size() == DEPTH) n_full++;
      if (model.size() == DEPTH && pop_ready && push_valid) n_both_full++;
      if (model.size() == 0) n_empty++;
      acc = push_valid && (model.size() < DEPTH || pop_ready);
      @(posedge clk);
      if (pop_ready && model.size() != 0) void'(model.pop_front());
      if (acc) model.push_back(push_data);
    end
    checks++;
    if (n_full == 0 || n_both_full == 0 || n_empty == 0) begin
      failures++;
      $display("full=%0d push+pop when full=%0d empty=%0d", n_full, n_both_full, n_empty);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
