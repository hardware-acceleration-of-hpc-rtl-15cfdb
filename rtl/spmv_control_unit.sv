// spmv_control_unit: decodes the CSRO new-row offsets of one SpMV input line.
//
// In the CSRO format each non-zero carries a new-row offset: 0 when it lies
// in the same row as the non-zero before it, otherwise 1 + the number of
// empty rows skipped. For the 8 lanes of a line this unit derives, in the
// same cycle the line is accepted:
//   row[k]     absolute row of lane k (running row + prefix sum of offsets);
//   seg_head   segment-start flags that steer the selective adder tree;
//   direct     lanes whose adder-tree result is a finished row, sent straight
//              to the merge unit ("merge element addresses");
//   cont / head_lane / head_is_tail / tail_open: what the reduce unit must do
//              with the first and last segment of the line ("reduce element
//              addresses");
//   frontier   every row below it has been fully handed to the pipeline.
// The running row register advances when 'accept' is high. On the first
// line of a color the running row restarts at color_row0 - 1, so the
// first offset (1 by the format's convention) lands on color_row0. On the
// last line the frontier jumps to the color's end, which also covers empty
// rows at the end of the color. Lanes with mask = 0 (padding in the last
// line) act as offset 0. A line with no valid lane only moves the frontier.
// Decoding is combinational; the pipeline registers the outputs. In the
// source the offsets pass the BRAM/multiplier delay first and are decoded
// after it; decoding first and delaying the decoded signals is equivalent
// and lets the same row numbers drive the write-window stall check.
module spmv_control_unit
  import solver_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   accept,       // line handed to the pipeline
  input  iline_t                 offs,
  input  logic [LANES-1:0]       mask,
  input  logic                   first,
  input  logic                   last,
  input  logic [IDX_W-1:0]       color_row0,
  input  logic [IDX_W-1:0]       color_rows,
  output iline_t                 row,
  output logic [LANES-1:0]       seg_head,
  output logic [LANES-1:0]       seg_end,
  output logic [LANES-1:0]       direct,
  output logic                   cont,         // lane 0 continues the open row
  output logic [$clog2(LANES)-1:0] head_lane,  // last lane of the first segment
  output logic                   head_is_tail, // one segment covers the line
  output logic                   tail_open,    // last segment continues in the next line
  output logic                   empty,        // no valid lane
  output logic [IDX_W-1:0]       frontier
);
  logic [IDX_W-1:0] cur_row;   // row of lane 7 of the previous line
  iline_t           o;
  logic [IDX_W-1:0] base, acc;

  always_comb begin
    base  = first ? color_row0 - 1'b1 : cur_row;
    empty = (mask == '0);
    for (int k = 0; k < LANES; k++) o[k] = mask[k] ? offs[k] : '0;
    acc = base;
    for (int k = 0; k < LANES; k++) begin
      acc    = acc + o[k];
      row[k] = acc;
    end
    for (int k = 0; k < LANES; k++) seg_head[k] = (k == 0) || (o[k] != '0);
    for (int k = 0; k < LANES; k++) seg_end[k]  = (k == LANES-1) || (o[k+1 < LANES ? k+1 : k] != '0);
    cont = (o[0] == '0) && !first;
    head_lane = '0;
    for (int k = LANES-1; k >= 0; k--) if (seg_end[k]) head_lane = k[$clog2(LANES)-1:0];
    head_is_tail = (head_lane == $clog2(LANES)'(LANES-1));
    tail_open    = !last;
    for (int k = 0; k < LANES; k++) begin
      direct[k] = seg_end[k] && !empty
                  && !(cont && k <= int'(head_lane))
                  && (k != LANES-1 || last);
    end
    frontier = last ? color_row0 + color_rows : row[LANES-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      cur_row <= '0;
    else if (accept) cur_row <= row[LANES-1];
  end
endmodule
