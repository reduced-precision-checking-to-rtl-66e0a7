// operand_buffer: holds the checker's operands while the full-precision FPU works.
//
// The RPC checker always waits until the FPU has produced a result, even for forward checks,
// so the truncated operands and the opcode of every issued operation must be kept until its
// result comes back. This is a first-in first-out buffer of DEPTH entries of type T:
// an entry is written when an operation is issued (push) and read when its result arrives (pop).
//
// Interface: push_valid/push_ready and pop_valid/pop_ready handshakes; push_ready is low when
// the buffer is full, which must stall issue to the FPU. A push and a pop may happen in the
// same cycle, also when the buffer is full. The head entry is visible on pop_data
// combinationally. Only the entry being written is loaded, which is the clock enable a
// clock-gating cell would use.
//
// What follows the paper: operand buffers between issue and checking, with clock gating to
// save power. This design's own choices: the FIFO organisation, the depth (4), the stall when
// full, and the assumption that the FPU returns results in issue order.
module operand_buffer #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push_valid,
  output logic push_ready,
  input  T     push_data,
  output logic pop_valid,
  input  logic pop_ready,
  output T     pop_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                 mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             do_push, do_pop;

  assign pop_valid  = count != '0;
  assign push_ready = (count != ($clog2(DEPTH+1))'(DEPTH)) || pop_ready;
  assign pop_data   = mem[rd_ptr];
  assign do_push    = push_valid && push_ready;
  assign do_pop     = pop_valid && pop_ready;

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= incr(wr_ptr);
      if (do_pop)  rd_ptr <= incr(rd_ptr);
      if (do_push && !do_pop)      count <= count + 1'b1;
      else if (do_pop && !do_push) count <= count - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= push_data;
  end

  // a result must never arrive for an operation that was not issued
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop_ready |-> pop_valid)
    else $error("operand_buffer: result arrived with no operation outstanding");

endmodule
