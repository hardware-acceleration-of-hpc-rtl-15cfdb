// write_unit: collects SpMV / substitution results, which arrive in any
// order, and releases them as whole aligned lines in row order.
//
// The buffer holds WIN rows, row r in entry r mod WIN (a cyclic partition
// of the rows). Up to NOUT results are stored per cycle. The frontier from
// the SpMV unit says all rows below it are complete; as soon as the frontier
// covers the current line (rows lb..lb+7, lb aligned to 8, clipped to
// end_row) the line is offered on out_* with a lane mask of the rows inside
// [row_lo, end_row). Rows that received no result (empty rows) read as 0.
// On acceptance the entries are freed and lb advances by 8; lb is fed back
// to the SpMV unit as the base of its flow-control window. done is high
// once every line up to end_row has left.
//
// Following the source: the write unit receives unordered results and
// emits ordered cache lines. The window size and the aligned-line rule are
// this design's choices.
module write_unit
  import fp64_pkg::*;
  import solver_pkg::*;
#(
  parameter int WIN = 512
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [IDX_W-1:0]           row_lo,
  input  logic [IDX_W-1:0]           end_row,
  input  logic [NOUT-1:0]            res_valid,
  input  logic [NOUT-1:0][IDX_W-1:0] res_row,
  input  logic [NOUT-1:0][63:0]      res_val,
  input  logic                       fr_valid,
  input  logic [IDX_W-1:0]           frontier,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [IDX_W-1:0]           out_row,    // first row of the line (aligned)
  output vline_t                     out_vals,
  output logic [LANES-1:0]           out_mask,
  output logic [IDX_W-1:0]           base,
  output logic                       done
);
  localparam int WAW = $clog2(WIN);
  fp64_t            vals [WIN];
  logic [WIN-1:0]   full;
  logic [IDX_W-1:0] lb, lo, hi, fr;
  logic [IDX_W-1:0] line_end;

  assign base     = lb;
  assign out_row  = lb;
  assign line_end = (lb + LANES > hi) ? hi : lb + LANES;
  assign out_valid = lb < hi && fr >= line_end;
  assign done     = !(lb < hi);

  always_comb begin
    for (int k = 0; k < LANES; k++) begin
      logic [IDX_W-1:0] r;
      r = lb + IDX_W'(k);
      out_mask[k] = r >= lo && r < hi;
      out_vals[k] = full[WAW'(r)] ? vals[WAW'(r)] : FP64_ZERO;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lb   <= '0;
      lo   <= '0;
      hi   <= '0;
      fr   <= '0;
      full <= '0;
    end else begin
      if (start) begin
        lb   <= {row_lo[IDX_W-1:3], 3'b000};
        lo   <= row_lo;
        hi   <= end_row;
        fr   <= row_lo;
        full <= '0;
      end else begin
        if (fr_valid && frontier > fr) fr <= frontier;
        if (out_valid && out_ready) begin
          lb <= lb + LANES;
          for (int k = 0; k < LANES; k++) full[WAW'(lb + IDX_W'(k))] <= 1'b0;
        end
        for (int j = 0; j < NOUT; j++)
          if (res_valid[j]) full[WAW'(res_row[j])] <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk)
    for (int j = 0; j < NOUT; j++)
      if (res_valid[j]) vals[WAW'(res_row[j])] <= res_val[j];
endmodule
