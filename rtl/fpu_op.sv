// fpu_op: behavioural model of one single-precision floating-point unit.
//
// BEHAVIOURAL MODEL, not synthesizable. The FPU sets of each HCU partition
// are built from library floating-point units (multiplier, adder,
// exponential, logarithm, divider, comparator); they are not designed here.
// This model computes the same functions in real arithmetic and rounds the
// result to single precision, so the rest of the design can be simulated.
// The operation is chosen per call by `op`, which lets one model stand for
// every unit type; each instance in cell_update is only ever given the
// operation of the unit it represents.
//
// Interface: combinational, y = op(a, b); for OP_CMP, y[0] = (a > b).
// Timing: zero-delay; the caller registers the result, which gives the
// one-cycle multiply/add and the single-cycle pipelined exponential this
// design schedules for.
module fpu_op
  import ebrain_pkg::*;
(
  input  logic [2:0] op,   // 0 mul, 1 add, 2 sub, 3 exp, 4 log, 5 div, 6 cmp
  input  fp_t        a,
  input  fp_t        b,
  output fp_t        y
);
  real ra, rb;

  always_comb begin
    ra = fp_to_real(a);
    rb = fp_to_real(b);
    unique case (op)
      3'd0: y = real_to_fp(ra * rb);
      3'd1: y = real_to_fp(ra + rb);
      3'd2: y = real_to_fp(ra - rb);
      3'd3: y = real_to_fp($exp(ra));
      3'd4: y = (ra > 0.0) ? real_to_fp($ln(ra)) : 32'hff80_0000;  // log(0) = -inf
      3'd5: y = (rb != 0.0) ? real_to_fp(ra / rb) : 32'h7f80_0000;
      3'd6: y = {31'd0, fp_gt(a, b)};
      default: y = FP_ZERO;
    endcase
  end
endmodule
