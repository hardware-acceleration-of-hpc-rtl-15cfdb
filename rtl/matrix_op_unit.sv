// matrix_op_unit: the Matrix Operation Unit - sparse matrix-vector product
// and ILU0 substitution passes over a sparstitioned matrix.
//
// The matrix is split into colors (row blocks whose columns touch a bounded
// vector partition). For each color: the partition of the vector is gathered
// from the on-chip vector memory into a staging buffer (internal read unit),
// transferred into the SpMV unit's partition memories, and then the color's
// CSRO lines stream from memory (external read unit) through the SpMV unit
// into the write unit.
//   MOP_SPMV    : results leave as aligned lines on the write port
//                 (res_base + row/8, lane strobes). The gather of color c+1
//                 runs while color c streams (look-ahead), so between colors
//                 only the transfer remains. The write unit spans all n rows.
//   MOP_ILU_FWD / MOP_ILU_BWD : the write unit's lines go to the ILU0 unit,
//                 which updates the on-chip vector in place. Because color
//                 c+1 reads values that color c writes, colors run strictly
//                 one after another without look-ahead.
// start with mode and the matrix descriptor (size-table address and color
// count) begins the pass; done pulses at the end. The size table is
// re-read at every start. Counters: stall_cycles (SpMV unit waited for
// write-buffer room), overlap_cycles (gather busy while lines stream),
// colors_done.
//
// Following the source: the unit serves both SpMV and ILU0 apply, with the
// look-ahead gather for SpMV. Departure: the source also forwards ILU0
// results straight into the partition memories so that the next color need
// not wait; here the next color re-gathers after the previous one is
// written. The sequencing details are this design's choices.
module matrix_op_unit
  import fp64_pkg::*;
  import solver_pkg::*;
#(
  parameter int MAX_COLORS = 256,
  parameter int VPM_DEPTH  = 4096,
  parameter int WIN        = 512,
  parameter int MUL_LAT    = 2,
  parameter int UAW        = 18,
  parameter int CAW        = $clog2(MAX_COLORS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  mop_e              mode,
  input  logic [ADDR_W-1:0] meta_base,
  input  logic [CAW:0]      ncolors,
  input  logic [IDX_W-1:0]  n,
  input  logic [ADDR_W-1:0] diag_base,
  input  logic [ADDR_W-1:0] res_base,
  output logic              busy,
  output logic              done,
  // matrix read ports
  output logic              v_req_valid,
  input  logic              v_req_ready,
  output logic [ADDR_W-1:0] v_req_addr,
  input  logic              v_rsp_valid,
  input  line_t             v_rsp_data,
  output logic              i_req_valid,
  input  logic              i_req_ready,
  output logic [ADDR_W-1:0] i_req_addr,
  input  logic              i_rsp_valid,
  input  line_t             i_rsp_data,
  output logic              m_req_valid,
  input  logic              m_req_ready,
  output logic [ADDR_W-1:0] m_req_addr,
  input  logic              m_rsp_valid,
  input  line_t             m_rsp_data,
  // diagonal read port (ILU backward)
  output logic              d_req_valid,
  input  logic              d_req_ready,
  output logic [ADDR_W-1:0] d_req_addr,
  input  logic              d_rsp_valid,
  input  line_t             d_rsp_data,
  // result write port (SpMV)
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [ADDR_W-1:0] wr_addr,
  output line_t             wr_data,
  output logic [LANES-1:0]  wr_strb,
  // on-chip vector memory
  output logic              u0_en,
  output logic [UAW-1:0]    u0_addr,
  input  fp64_t             u0_rdata,
  output logic              u1_en,
  output logic              u1_we,
  output logic [UAW-1:0]    u1_addr,
  output fp64_t             u1_wdata,
  input  fp64_t             u1_rdata,
  // statistics
  output logic [31:0]       stall_cycles,
  output logic [31:0]       overlap_cycles,
  output logic [31:0]       colors_done
);
  localparam int PAW = $clog2(VPM_DEPTH);
  typedef enum logic [2:0] { S_IDLE, S_SIZES, S_GATHER, S_GWAIT, S_XFER, S_RUN, S_FINISH } st_e;
  st_e              st;
  mop_e             md;
  logic             spmv;
  logic [CAW:0]     nc;
  logic [CAW-1:0]   c, pc;
  logic             gdone, xdone, first_run;

  // control pulses
  logic ers_sizes, ers_part, ers_mat, irs_gather, irs_xfer, wu_start;
  color_size_t part_sz, mat_sz;
  logic sizes_busy, part_busy, mat_busy;
  logic idx_valid, idx_ready, mat_valid, mat_ready;
  logic [IDX_W-1:0] idx;
  mat_line_t mat;

  external_read_unit #(.MAX_COLORS(MAX_COLORS)) u_ers (
    .clk, .rst_n,
    .start_sizes(ers_sizes), .meta_base, .ncolors,
    .start_part(ers_part), .part_color(pc), .start_mat(ers_mat), .mat_color(c),
    .part_sz, .mat_sz, .sizes_busy, .part_busy, .mat_busy,
    .idx_valid, .idx_ready, .idx, .mat_valid, .mat_ready, .mat,
    .v_req_valid, .v_req_ready, .v_req_addr, .v_rsp_valid, .v_rsp_data,
    .i_req_valid, .i_req_ready, .i_req_addr, .i_rsp_valid, .i_rsp_data,
    .m_req_valid, .m_req_ready, .m_req_addr, .m_rsp_valid, .m_rsp_data
  );

  logic [IDX_W-1:0] cur_npart, row0, nrows, wu_base;
  logic vpm_we, irs_busy, gather_done, xfer_done;
  logic [PAW-1:0] vpm_waddr;
  fp64_t vpm_wdata;

  internal_read_unit #(.PART_DEPTH(VPM_DEPTH), .UAW(UAW)) u_irs (
    .clk, .rst_n, .start_gather(irs_gather), .start_transfer(irs_xfer),
    .npart(irs_gather ? part_sz.npart : cur_npart),
    .idx_valid, .idx_ready, .idx,
    .uram_en(u0_en), .uram_addr(u0_addr), .uram_rdata(u0_rdata),
    .vpm_we, .vpm_waddr, .vpm_wdata, .busy(irs_busy), .gather_done, .xfer_done
  );

  logic [NOUT-1:0]  res_valid;
  logic [NOUT-1:0][IDX_W-1:0] res_row;
  logic [NOUT-1:0][63:0] res_val;
  logic fr_valid, pl_busy, pl_stall;
  logic [IDX_W-1:0] frontier;

  spmv_pipeline #(.MUL_LAT(MUL_LAT), .VPM_DEPTH(VPM_DEPTH), .WIN(WIN)) u_spmv (
    .clk, .rst_n, .in_valid(mat_valid), .in_ready(mat_ready), .in_line(mat),
    .color_row0(row0), .color_rows(nrows), .wr_base(wu_base),
    .vpm_we, .vpm_waddr, .vpm_wdata,
    .res_valid, .res_row, .res_val, .fr_valid, .frontier, .busy(pl_busy), .stall(pl_stall)
  );

  logic wu_valid, wu_ready, wu_done;
  logic [IDX_W-1:0] wu_row;
  vline_t wu_vals;
  logic [LANES-1:0] wu_mask;
  logic [IDX_W-1:0] wu_lo, wu_hi;

  write_unit #(.WIN(WIN)) u_wu (
    .clk, .rst_n, .start(wu_start), .row_lo(wu_lo), .end_row(wu_hi),
    .res_valid, .res_row, .res_val, .fr_valid, .frontier,
    .out_valid(wu_valid), .out_ready(wu_ready), .out_row(wu_row), .out_vals(wu_vals),
    .out_mask(wu_mask), .base(wu_base), .done(wu_done)
  );

  logic ilu_ready, ilu_busy;
  logic [31:0] ilu_rows;
  ilu0_unit #(.UAW(UAW)) u_ilu (
    .clk, .rst_n, .bwd(md == MOP_ILU_BWD), .n, .diag_base,
    .in_valid(wu_valid && !spmv), .in_ready(ilu_ready), .in_row(wu_row),
    .in_sums(wu_vals), .in_mask(wu_mask),
    .dreq_valid(d_req_valid), .dreq_ready(d_req_ready), .dreq_addr(d_req_addr),
    .drsp_valid(d_rsp_valid), .drsp_data(d_rsp_data),
    .uram_en(u1_en), .uram_we(u1_we), .uram_addr(u1_addr), .uram_wdata(u1_wdata),
    .uram_rdata(u1_rdata), .busy(ilu_busy), .rows_done(ilu_rows)
  );

  assign spmv     = md == MOP_SPMV;
  assign wu_ready = spmv ? wr_ready : ilu_ready;
  assign wr_valid = spmv && wu_valid;
  assign wr_addr  = res_base + ADDR_W'(wu_row >> 3);
  assign wr_data  = wu_vals;
  assign wr_strb  = wu_mask;
  assign busy     = st != S_IDLE;

  // state machine
  always_comb begin
    ers_sizes  = st == S_IDLE && start;
    ers_part   = 1'b0;
    irs_gather = 1'b0;
    irs_xfer   = 1'b0;
    ers_mat    = 1'b0;
    wu_start   = 1'b0;
    wu_lo      = '0;
    wu_hi      = n;
    case (st)
      S_SIZES:  if (!sizes_busy && spmv) wu_start = 1'b1;
      S_GATHER: begin ers_part = 1'b1; irs_gather = 1'b1; end
      S_XFER:   if (!xdone && !irs_busy) irs_xfer = 1'b1;
      S_RUN: if (first_run) begin
        ers_mat = 1'b1;
        if (!spmv) begin
          wu_start = 1'b1;
          wu_lo    = mat_sz.row0;
          wu_hi    = mat_sz.row0 + mat_sz.nrows;
        end else if (32'(c) + 1 < 32'(nc)) begin
          ers_part   = 1'b1;
          irs_gather = 1'b1;
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st             <= S_IDLE;
      md             <= MOP_SPMV;
      nc             <= '0;
      c              <= '0;
      pc             <= '0;
      gdone          <= 1'b0;
      xdone          <= 1'b0;
      first_run      <= 1'b0;
      cur_npart      <= '0;
      row0           <= '0;
      nrows          <= '0;
      done           <= 1'b0;
      stall_cycles   <= '0;
      overlap_cycles <= '0;
      colors_done    <= '0;
    end else begin
      done <= 1'b0;
      if (gather_done) gdone <= 1'b1;
      if (irs_gather)  gdone <= 1'b0;
      if (pl_stall) stall_cycles <= stall_cycles + 1'b1;
      if (irs_busy && mat_busy) overlap_cycles <= overlap_cycles + 1'b1;
      case (st)
        S_IDLE: if (start) begin
          md <= mode;
          nc <= ncolors;
          c  <= '0;
          pc <= '0;
          st <= S_SIZES;
        end
        S_SIZES: if (!sizes_busy) st <= (nc == 0) ? S_FINISH : S_GATHER;
        S_GATHER: begin
          cur_npart <= part_sz.npart;
          st        <= S_GWAIT;
        end
        S_GWAIT: if (gdone && !irs_busy) begin
          xdone <= 1'b0;
          st    <= S_XFER;
        end
        S_XFER: begin
          if (xfer_done) xdone <= 1'b1;
          if (xdone) begin
            pc        <= c + 1'b1;
            first_run <= 1'b1;
            st        <= S_RUN;
          end
        end
        S_RUN: begin
          first_run <= 1'b0;
          if (first_run) begin
            row0  <= mat_sz.row0;
            nrows <= mat_sz.nrows;
            if (spmv && 32'(c) + 1 < 32'(nc)) cur_npart <= part_sz.npart;
          end else if (!mat_busy && (spmv || (wu_done && !ilu_busy && !pl_busy))) begin
            colors_done <= colors_done + 1'b1;
            c           <= c + 1'b1;
            if (32'(c) + 1 == 32'(nc))  st <= S_FINISH;
            else if (spmv)              st <= S_GWAIT;
            else begin
              pc <= c + 1'b1;
              st <= S_GATHER;
            end
          end
        end
        S_FINISH: if (!pl_busy && wu_done && !ilu_busy) begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
