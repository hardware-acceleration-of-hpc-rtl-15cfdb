// ilu0_unit: the substitution stage of ILU0 application.
//
// In ILU mode the SpMV unit computes, for the rows of one color, the sum s
// of the off-diagonal products of L (forward) or U (backward) with the
// already-solved part of the vector. The write unit hands those sums over as
// aligned lines of 8 rows. For each row in the line mask this unit reads the
// right-hand value v from the on-chip vector memory (port 1), forms
// p = v - s and, for the backward pass, p = (v - s) / d with d the row's
// diagonal, then writes p back in place. The backward pass works in
// reversed row order (U and the diagonal are stored reversed), so row r is
// kept at vector address N-1-r; the diagonal line of the 8 rows is fetched
// from memory with a single line read.
//
// Sequence per line: [diagonal line read] -> 8 vector reads (one per cycle)
// -> one subtract cycle -> [8 parallel dividers, 58 cycles] -> 8 writes.
//
// Follows the source: subtract for forward substitution, subtract then
// divide for backward, reversed storage of U and the diagonal. This
// design's choices: a scalar diagonal instead of the source's 3x3 diagonal
// blocks, and one line in flight at a time.
module ilu0_unit
  import fp64_pkg::*;
  import solver_pkg::*;
#(
  parameter int UAW = 18
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              bwd,         // backward pass (divide, reversed addressing)
  input  logic [IDX_W-1:0]  n,           // vector length, for reversed addressing
  input  logic [ADDR_W-1:0] diag_base,   // line address of the reversed diagonal
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [IDX_W-1:0]  in_row,
  input  vline_t            in_sums,
  input  logic [LANES-1:0]  in_mask,
  output logic              dreq_valid,
  input  logic              dreq_ready,
  output logic [ADDR_W-1:0] dreq_addr,
  input  logic              drsp_valid,
  input  line_t             drsp_data,
  output logic              uram_en,
  output logic              uram_we,
  output logic [UAW-1:0]    uram_addr,
  output fp64_t             uram_wdata,
  input  fp64_t             uram_rdata,
  output logic              busy,
  output logic [31:0]       rows_done
);
  typedef enum logic [2:0] { S_IDLE, S_DREQ, S_DRSP, S_RD, S_SUB, S_DIV, S_WR } st_e;
  st_e              st;
  logic [IDX_W-1:0] row;
  vline_t           s, v, d;
  logic [LANES-1:0] m;
  logic [3:0]       k;
  logic             rd_pend;
  logic [2:0]       rd_lane;
  logic [LANES-1:0] dv_busy, dv_done;
  vline_t           dv_y;
  logic             dv_start;
  logic [LANES-1:0] dv_pend;

  function automatic logic [UAW-1:0] vaddr(logic [IDX_W-1:0] r, logic b, logic [IDX_W-1:0] nn);
    return b ? UAW'(nn - 1 - r) : UAW'(r);
  endfunction

  assign in_ready   = st == S_IDLE;
  assign busy       = st != S_IDLE;
  assign dreq_valid = st == S_DREQ;
  assign dreq_addr  = diag_base + ADDR_W'(row >> 3);

  always_comb begin
    uram_en    = 1'b0;
    uram_we    = 1'b0;
    uram_addr  = vaddr(row + IDX_W'(k), bwd, n);
    uram_wdata = v[k[2:0]];
    if ((st == S_RD || st == S_WR) && k < 8 && m[k[2:0]]) begin
      uram_en = 1'b1;
      uram_we = st == S_WR;
    end
  end

  for (genvar g = 0; g < LANES; g++) begin : g_div
    fp64_divsqrt u_div (
      .clk, .rst_n, .start(dv_start), .op_sqrt(1'b0), .a(v[g]), .b(d[g]),
      .busy(dv_busy[g]), .done(dv_done[g]), .y(dv_y[g])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      row       <= '0;
      s         <= '0;
      v         <= '0;
      d         <= '0;
      m         <= '0;
      k         <= '0;
      rd_pend   <= 1'b0;
      rd_lane   <= '0;
      rows_done <= '0;
      dv_pend   <= '0;
      dv_start  <= 1'b0;
    end else begin
      dv_start <= st == S_SUB && bwd;
      rd_pend <= st == S_RD && uram_en;
      rd_lane <= k[2:0];
      if (rd_pend) v[rd_lane] <= uram_rdata;
      for (int g = 0; g < LANES; g++)
        if (dv_done[g]) begin
          v[g]       <= dv_y[g];
          dv_pend[g] <= 1'b0;
        end
      if (dv_start) dv_pend <= '1;
      case (st)
        S_IDLE: if (in_valid) begin
          row <= in_row;
          s   <= in_sums;
          m   <= in_mask;
          k   <= '0;
          st  <= bwd ? S_DREQ : S_RD;
        end
        S_DREQ: if (dreq_ready) st <= S_DRSP;
        S_DRSP: if (drsp_valid) begin
          d  <= drsp_data;
          st <= S_RD;
        end
        S_RD: begin
          if (k == 8) begin
            if (!rd_pend) begin
              st <= S_SUB;
            end
          end else k <= k + 1'b1;
        end
        S_SUB: begin
          for (int g = 0; g < LANES; g++) v[g] <= fp64_add_f(v[g], fp64_neg(s[g]));
          k  <= '0;
          st <= bwd ? S_DIV : S_WR;
        end
        S_DIV: if (!dv_start && dv_pend == '0) st <= S_WR;
        S_WR: begin
          if (k == 8) begin
            st        <= S_IDLE;
            rows_done <= rows_done + 32'($countones(m));
          end else k <= k + 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
