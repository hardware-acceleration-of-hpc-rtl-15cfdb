// fp_scalar_ops: the solver's scalar floating point operator block.
//
// BiCGStab needs a few operations on single values between its vector
// passes: the square root of a norm, the divisions and products of the
// alpha, beta, omega and threshold updates. One operation at a time is
// started with a 'start' pulse and op:
//   SOP_MUL  : y = a * b   (done one cycle after start)
//   SOP_DIV  : y = a / b   (done 57 cycles after start, iterative divider;
//              zero, infinite or NaN operands finish after 3 cycles)
//   SOP_SQRT : y = sqrt(a) (done 57 cycles after start)
// 'done' pulses once with y valid; y holds until the next start.
// The source names this block ("Floating Point Operations") and what it is
// used for; the operator set and latencies are this design's choices.
module fp_scalar_ops (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  solver_pkg::sop_e  op,
  input  fp64_pkg::fp64_t   a,
  input  fp64_pkg::fp64_t   b,
  output logic              busy,
  output logic              done,
  output fp64_pkg::fp64_t   y
);
  import fp64_pkg::*;
  import solver_pkg::*;

  logic  ds_busy, ds_done;
  fp64_t ds_y, mul_y;
  logic  mul_done, use_ds;

  fp64_divsqrt u_ds (
    .clk, .rst_n,
    .start   (start && op != SOP_MUL),
    .op_sqrt (op == SOP_SQRT),
    .a, .b,
    .busy    (ds_busy),
    .done    (ds_done),
    .y       (ds_y)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mul_done <= 1'b0;
      mul_y    <= FP64_ZERO;
      use_ds   <= 1'b0;
    end else begin
      mul_done <= start && op == SOP_MUL;
      if (start && op == SOP_MUL) mul_y <= fp64_mul_f(a, b);
      if (start) use_ds <= op != SOP_MUL;
    end
  end

  assign busy = ds_busy || (start && op == SOP_MUL);
  assign done = mul_done || ds_done;
  assign y    = use_ds ? ds_y : mul_y;
endmodule
