// fp32_fpu_model: behavioural model of the full-precision FPU that the RPC unit checks.
// Simulation only; not synthesizable.
//
// It computes IEEE-754 single-precision add, sub, mul, div (A / B) and sqrt (of B), rounded to
// nearest even, by evaluating the operation in double precision and rounding once to single
// (exact for these five operations), and raises the overflow, underflow, invalid and
// divide-by-zero flags. Each accepted operation returns its result after a fixed latency per
// operation type, and results leave strictly in issue order (a long division holds back the
// results behind it), so several operations can be in flight.
//
// Fault injection: `in_flip` is XORed into the result of the operation it is issued with,
// which stands for a fault inside the FPU that corrupts some result bits. Flags are those of
// the fault-free operation.
module fp32_fpu_model
  import rpc_pkg::*;
  import rpc_tb_pkg::*;
#(
  parameter int LAT_ADD  = 3,
  parameter int LAT_MUL  = 4,
  parameter int LAT_DIV  = 12,
  parameter int LAT_SQRT = 12
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,      // operation accepted this cycle
  input  fpu_op_e     in_op,
  input  logic [31:0] in_a,
  input  logic [31:0] in_b,
  input  logic [31:0] in_flip,
  output logic        out_valid,
  output logic [31:0] out_c,
  output fpu_flags_t  out_flags
);
  typedef struct {
    longint      due;
    logic [31:0] c;
    fpu_flags_t  flags;
  } entry_t;

  entry_t q[$];
  longint cyc;

  function automatic logic is_nan(input logic [31:0] x);
    return x[30:23] == 8'hFF && x[22:0] != 0;
  endfunction
  function automatic logic is_inf(input logic [31:0] x);
    return x[30:0] == {8'hFF, 23'd0};
  endfunction

  // fault-free result and flags of one operation
  function automatic void compute(input fpu_op_e op, input logic [31:0] a, input logic [31:0] b,
                                  output logic [31:0] c, output fpu_flags_t f);
    real ra, rb, r;
    logic nan_in, inf_in;
    ra = f32_to_real(a);
    rb = f32_to_real(b);
    nan_in = is_nan(b) || (op != OP_SQRT && is_nan(a));
    inf_in = is_inf(b) || (op != OP_SQRT && is_inf(a));
    case (op)
      OP_ADD:  r = ra + rb;
      OP_SUB:  r = ra - rb;
      OP_MUL:  r = ra * rb;
      OP_DIV:  r = ra / rb;
      default: r = (rb < 0.0) ? $bitstoreal(64'h7FF8000000000000) : $sqrt(rb);
    endcase
    c = real_to_f32(r);
    f = '0;
    f.invalid     = is_nan(c) && !nan_in;
    f.div_by_zero = op == OP_DIV && b[30:0] == 0 && a[30:0] != 0 && !nan_in && !inf_in;
    f.overflow    = is_inf(c) && !inf_in && !f.div_by_zero;
    f.underflow   = !nan_in && !inf_in && r != 0.0 && ((r < 0.0) ? -r : r) < pow2(-126);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc       <= 0;
      out_valid <= 1'b0;
      out_c     <= '0;
      out_flags <= '0;
      q.delete();
    end else begin
      logic [31:0] c;
      fpu_flags_t  f;
      int          lat;
      cyc <= cyc + 1;
      if (in_valid) begin
        compute(in_op, in_a, in_b, c, f);
        case (in_op)
          OP_ADD, OP_SUB: lat = LAT_ADD;
          OP_MUL:         lat = LAT_MUL;
          OP_DIV:         lat = LAT_DIV;
          default:        lat = LAT_SQRT;
        endcase
        q.push_back('{due: cyc + longint'(lat), c: c ^ in_flip, flags: f});
      end
      out_valid <= 1'b0;
      if (q.size() != 0 && q[0].due <= cyc) begin
        out_valid <= 1'b1;
        out_c     <= q[0].c;
        out_flags <= q[0].flags;
        void'(q.pop_front());
      end
    end
  end
endmodule
