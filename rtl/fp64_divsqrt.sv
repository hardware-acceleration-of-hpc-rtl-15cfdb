// fp64_divsqrt: iterative IEEE-754 double-precision divider / square root.
//
// A pulse on 'start' with op_sqrt = 0 computes a / b, with op_sqrt = 1 it
// computes sqrt(a) (b ignored). The unit is busy for 55 cycles plus one
// rounding cycle, then pulses 'done' with the result on y (held until the
// next start). Division is restoring division, one quotient bit per cycle;
// the square root is the digit-by-digit method, one root bit per cycle.
// Rounding is round-to-nearest-even through fp64_pkg::fp64_round.
// Special cases: x/0 = inf, 0/x = 0, sqrt of a negative = NaN, NaN in gives
// NaN. The source asks only for "the square root of the norm calculation"
// and the divisions of the solver's scalar steps and of the ILU0 backward
// substitution; the iterative form is this design's choice.
module fp64_divsqrt (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            op_sqrt,
  input  fp64_pkg::fp64_t a,
  input  fp64_pkg::fp64_t b,
  output logic            busy,
  output logic            done,
  output fp64_pkg::fp64_t y
);
  import fp64_pkg::*;

  typedef enum logic [1:0] { S_IDLE, S_ITER, S_ROUND } state_e;
  state_e       state;
  logic         sq, sgn, special;
  fp64_t        spec_val;
  int           ex;
  logic [5:0]   cnt;
  logic [111:0] rem;      // partial remainder
  logic [111:0] rad;      // square-root radicand, consumed two bits per step
  logic [54:0]  q;        // quotient / root bits
  logic [52:0]  dvs;      // divisor mantissa

  assign busy = state != S_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      y     <= FP64_ZERO;
      cnt   <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          sq      <= op_sqrt;
          special <= 1'b1;
          q       <= '0;
          cnt     <= 6'd55;
          if (op_sqrt) begin
            sgn <= 1'b0;
            if (fp64_is_nan(a) || (a[63] && !fp64_is_zero(a))) spec_val <= FP64_QNAN;
            else if (fp64_is_zero(a))                          spec_val <= {a[63], 63'd0};
            else if (fp64_is_special(a))                       spec_val <= FP64_PINF;
            else begin
              special <= 1'b0;
              // value = 1.m * 2^E ; make E even so the root exponent is E/2
              if (a[52] == 1'b0) begin  // biased exponent even -> E odd
                rad <= {59'd0, 1'b1, a[51:0]} << 59;  // radicand (2 * 1.m) * 2^56, top-aligned
                ex  <= (int'(a[62:52]) - 1 - 1023) / 2 + 1023;
              end else begin
                rad <= {59'd0, 1'b1, a[51:0]} << 58;  // radicand 1.m * 2^56, top-aligned
                ex  <= (int'(a[62:52]) - 1023) / 2 + 1023;
              end
              rem <= '0;
            end
          end else begin
            sgn <= a[63] ^ b[63];
            if (fp64_is_nan(a) || fp64_is_nan(b) ||
                (fp64_is_zero(a) && fp64_is_zero(b)) ||
                (fp64_is_special(a) && fp64_is_special(b)))  spec_val <= FP64_QNAN;
            else if (fp64_is_special(a) || fp64_is_zero(b))  spec_val <= {a[63]^b[63], 11'h7FF, 52'd0};
            else if (fp64_is_zero(a) || fp64_is_special(b))  spec_val <= {a[63]^b[63], 63'd0};
            else begin
              special <= 1'b0;
              dvs     <= {1'b1, b[51:0]};
              if (a[51:0] < b[51:0]) begin
                rem <= {58'd0, 1'b1, a[51:0], 1'b0};
                ex  <= int'(a[62:52]) - int'(b[62:52]) + 1023 - 1;
              end else begin
                rem <= {59'd0, 1'b1, a[51:0]};
                ex  <= int'(a[62:52]) - int'(b[62:52]) + 1023;
              end
            end
          end
          state <= S_ITER;
        end
        S_ITER: begin
          if (special) begin
            state <= S_ROUND;
          end else if (sq) begin
            logic [111:0] r2, trial;
            r2    = {rem[109:0], rad[111:110]};
            trial = {55'd0, q, 2'b01};
            if (r2 >= trial) begin
              rem <= r2 - trial;
              q   <= {q[53:0], 1'b1};
            end else begin
              rem <= r2;
              q   <= {q[53:0], 1'b0};
            end
            rad <= rad << 2;
          end else begin
            if (rem >= {59'd0, dvs}) begin
              rem <= (rem - {59'd0, dvs}) << 1;
              q   <= {q[53:0], 1'b1};
            end else begin
              rem <= rem << 1;
              q   <= {q[53:0], 1'b0};
            end
          end
          cnt <= cnt - 1'b1;
          if (cnt == 6'd1) state <= S_ROUND;
        end
        S_ROUND: begin
          y     <= special ? spec_val : fp64_round(sgn, ex, q, rem != '0);
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
