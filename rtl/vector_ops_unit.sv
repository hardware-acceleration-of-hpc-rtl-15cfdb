// vector_ops_unit: the solver's vector arithmetic, two dot_axpy units.
//
// One input stream of line pairs (a, b) drives both units:
//   VM_AXPY      unit 0: y = alpha*a + b
//   VM_DOT       unit 0: d0 = a.b
//   VM_DOT2      unit 0: d0 = a.b and unit 1: d1 = a.a in the same pass
//                (omega's numerator and denominator, t.s and t.t)
//   VM_AXPY_NORM unit 0: y = alpha*a + b, unit 1 chained on unit 0's
//                output: d1 = y.y (residual update and its norm in one pass)
// start clears both dot accumulators. y leaves on out_* MUL_LAT + ADD_LAT
// cycles after its input. done pulses once every dot result of the pass is
// out (after start + in_last, for the dot modes) or, for VM_AXPY, when the
// last output line leaves. d0 / d1 hold their values until the next start.
//
// Following the source: two dot_axpy units make up the vector operations
// unit, and the units can be chained. Which operations are paired is this
// design's choice.
module vector_ops_unit
  import fp64_pkg::*;
  import solver_pkg::*;
#(
  parameter int MUL_LAT = 2,
  parameter int ADD_LAT = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  vmode_e           mode,
  input  fp64_t            alpha,
  input  logic             in_valid,
  input  logic             in_last,
  input  vline_t           a,
  input  vline_t           b,
  input  logic [LANES-1:0] mask,
  output logic             out_valid,
  output logic             out_last,
  output vline_t           out_vals,
  output logic [LANES-1:0] out_mask,
  output fp64_t            d0,
  output fp64_t            d1,
  output logic             done
);
  logic   dv0, dv1, ov1, busy0, busy1;
  fp64_t  r0, r1;
  vline_t ov1_vals;
  logic [LANES-1:0] ov1_mask;
  logic   got0, got1, need0, need1, fired;
  logic   u1_valid, u1_last;
  vline_t u1_a, u1_b;
  logic [LANES-1:0] u1_mask;

  dot_axpy #(.MUL_LAT(MUL_LAT), .ADD_LAT(ADD_LAT)) u0 (
    .clk, .rst_n,
    .mode((mode == VM_AXPY || mode == VM_AXPY_NORM) ? VOP_AXPY : VOP_DOT),
    .alpha, .start, .in_valid, .in_last, .a, .b, .mask,
    .out_valid, .out_vals, .out_mask, .dot_valid(dv0), .dot_result(r0), .busy(busy0)
  );

  pipe_delay #(.W(1), .N(MUL_LAT + ADD_LAT)) u_last (
    .clk, .rst_n, .d(in_valid && in_last), .q(out_last)
  );

  always_comb begin
    if (mode == VM_AXPY_NORM) begin
      u1_valid = out_valid;
      u1_last  = out_last;
      u1_a     = out_vals;
      u1_b     = out_vals;
      u1_mask  = out_mask;
    end else begin
      u1_valid = in_valid && mode == VM_DOT2;
      u1_last  = in_last;
      u1_a     = a;
      u1_b     = a;
      u1_mask  = mask;
    end
  end

  dot_axpy #(.MUL_LAT(MUL_LAT), .ADD_LAT(ADD_LAT)) u1 (
    .clk, .rst_n, .mode(VOP_DOT), .alpha(FP64_ZERO), .start,
    .in_valid(u1_valid), .in_last(u1_last), .a(u1_a), .b(u1_b), .mask(u1_mask),
    .out_valid(ov1), .out_vals(ov1_vals), .out_mask(ov1_mask),
    .dot_valid(dv1), .dot_result(r1), .busy(busy1)
  );

  assign need0 = mode == VM_DOT || mode == VM_DOT2;
  assign need1 = mode == VM_DOT2 || mode == VM_AXPY_NORM;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d0   <= FP64_ZERO;
      d1   <= FP64_ZERO;
      got0 <= 1'b0;
      got1 <= 1'b0;
      done <= 1'b0;
      fired <= 1'b1;
    end else begin
      done <= 1'b0;
      if (start) begin
        got0 <= 1'b0;
        got1 <= 1'b0;
        fired <= 1'b0;
      end else begin
        if (dv0) begin d0 <= r0; got0 <= 1'b1; end
        if (dv1) begin d1 <= r1; got1 <= 1'b1; end
        if (mode == VM_AXPY) begin
          done <= out_valid && out_last;
        end else if ((got0 || dv0 || !need0) && (got1 || dv1 || !need1) && !fired) begin
          done  <= 1'b1;
          fired <= 1'b1;
        end
      end
    end
  end
endmodule
