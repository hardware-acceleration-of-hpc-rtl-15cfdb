// reduce_unit: adds together adder-tree results of different cycles that
// belong to the same row.
//
// A row that spills over a line boundary leaves a partial sum in the last
// segment of one line (the "tail") and continues in the first segment of
// the next ("head", marked cont). The unit keeps one open partial sum:
//   * a tail that does not end its color opens (or, when the whole line is
//     one continued row, extends) the open sum;
//   * the head of a continuing line closes it: the row result is
//     open sum + head;
//   * a line that starts with a new row closes the open sum as it is;
//   * on the last line of a color a continued single-segment line closes
//     at once.
// At most one row result leaves per cycle, registered (one cycle latency).
// The accumulation uses a single-cycle adder so the open sum can be reused
// in the next cycle; the source gives the function, the mechanism is this
// design's choice.
module reduce_unit
  import fp64_pkg::*;
  import solver_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             empty,
  input  logic             cont,
  input  logic             head_is_tail,
  input  logic             tail_open,
  input  fp64_t            head_sum,
  input  fp64_t            tail_sum,
  input  logic [IDX_W-1:0] tail_row,
  output logic             out_valid,
  output logic [IDX_W-1:0] out_row,
  output fp64_t            out_val,
  output logic             open        // a partial sum is being held
);
  fp64_t            acc;
  logic [IDX_W-1:0] acc_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open      <= 1'b0;
      out_valid <= 1'b0;
      acc       <= FP64_ZERO;
      acc_row   <= '0;
      out_row   <= '0;
      out_val   <= FP64_ZERO;
    end else begin
      out_valid <= 1'b0;
      if (in_valid && !empty) begin
        if (cont) begin
          if (head_is_tail) begin
            // whole line continues the open row
            if (tail_open) begin
              acc <= fp64_add_f(open ? acc : FP64_ZERO, tail_sum);
              open <= 1'b1;
            end else begin
              out_valid <= 1'b1;
              out_row   <= acc_row;
              out_val   <= fp64_add_f(open ? acc : FP64_ZERO, tail_sum);
              open      <= 1'b0;
            end
          end else begin
            out_valid <= 1'b1;
            out_row   <= acc_row;
            out_val   <= fp64_add_f(open ? acc : FP64_ZERO, head_sum);
            open      <= tail_open;
            acc       <= tail_sum;
            acc_row   <= tail_row;
          end
        end else begin
          if (open) begin
            out_valid <= 1'b1;
            out_row   <= acc_row;
            out_val   <= acc;
          end
          open    <= tail_open;
          acc     <= tail_sum;
          acc_row <= tail_row;
        end
      end
    end
  end
endmodule
