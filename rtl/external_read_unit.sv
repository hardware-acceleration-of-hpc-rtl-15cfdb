// external_read_unit: turns the off-chip sparstitioned matrix into the
// streams the SpMV unit consumes.
//
// Three memory read ports, each driven by a line_reader:
//   port V (values)  : CSRO value lines, 8 doubles per line;
//   port I (indices) : the matching index lines, 8 local column indices in
//                      bits [255:0] and 8 new-row offsets in bits [511:256];
//   port M (meta)    : the per-color size table and the partition indices.
// Jobs:
//   start_sizes : reads ncolors size lines from meta_base into the size
//                 table (one color_size_t per line, low bits).
//   start_part  : streams the npart partition indices (global vector
//                 addresses, 16 per line) of color part_color on idx_*.
//   start_mat   : streams color mat_color as mat_line_t on mat_*: values and
//                 indices are paired, the lane mask comes from nnz, first /
//                 last flag the color's first and last line. A color without
//                 non-zeros still produces one empty line, so its rows are
//                 closed.
// part_sz / mat_sz show the size-table entries of the selected colors.
//
// Following the source: the matrix lives in off-chip memory as value and
// index streams in CSRO form, with partition indices and color sizes as
// separate data structures. Line layouts and the table size are this
// design's choices.
module external_read_unit
  import fp64_pkg::*;
  import solver_pkg::*;
#(
  parameter int MAX_COLORS = 256,
  parameter int CAW        = $clog2(MAX_COLORS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // jobs
  input  logic              start_sizes,
  input  logic [ADDR_W-1:0] meta_base,
  input  logic [CAW:0]      ncolors,
  input  logic              start_part,
  input  logic [CAW-1:0]    part_color,
  input  logic              start_mat,
  input  logic [CAW-1:0]    mat_color,
  output color_size_t       part_sz,     // size entry of part_color
  output color_size_t       mat_sz,      // size entry of mat_color
  output logic              sizes_busy,
  output logic              part_busy,
  output logic              mat_busy,
  // streams
  output logic              idx_valid,
  input  logic              idx_ready,
  output logic [IDX_W-1:0]  idx,
  output logic              mat_valid,
  input  logic              mat_ready,
  output mat_line_t         mat,
  // memory ports
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
  input  line_t             m_rsp_data
);
  color_size_t      table_q [MAX_COLORS];

  // ---- meta port: size table, then partition indices
  logic             m_start, m_out_valid, m_out_ready, m_busy;
  line_t            m_out;
  logic [ADDR_W-1:0] m_base;
  logic [IDX_W-1:0] m_n;
  logic             loading_sizes;
  logic [CAW:0]     sizes_wr;
  logic [IDX_W-1:0] part_left;
  logic [3:0]       part_slot;
  color_size_t      psz, msz;

  assign psz     = table_q[part_color];
  assign m_start = start_sizes || start_part;
  assign m_base  = start_sizes ? meta_base : psz.part_line;
  assign m_n     = start_sizes ? IDX_W'(ncolors) : (psz.npart + 15) >> 4;

  line_reader u_mrd (
    .clk, .rst_n, .start(m_start), .base(m_base), .nlines(m_n),
    .req_valid(m_req_valid), .req_ready(m_req_ready), .req_addr(m_req_addr),
    .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data),
    .out_valid(m_out_valid), .out_ready(m_out_ready), .out_data(m_out), .busy(m_busy)
  );

  assign sizes_busy = loading_sizes;
  assign part_busy  = !loading_sizes && (part_left != 0);
  assign idx_valid  = part_busy && m_out_valid;
  assign idx        = m_out[32*part_slot +: 32];
  assign m_out_ready = loading_sizes ? 1'b1
                     : (idx_ready && part_left != 0 && (part_slot == 4'd15 || part_left == 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      loading_sizes <= 1'b0;
      sizes_wr      <= '0;
      part_left     <= '0;
      part_slot     <= '0;
    end else begin
      if (start_sizes) begin
        loading_sizes <= ncolors != 0;
        sizes_wr      <= '0;
      end else if (loading_sizes && m_out_valid) begin
        sizes_wr <= sizes_wr + 1'b1;
        if (sizes_wr + 1'b1 == ncolors) loading_sizes <= 1'b0;
      end
      if (start_part) begin
        part_left <= psz.npart;
        part_slot <= '0;
      end else if (idx_valid && idx_ready) begin
        part_left <= part_left - 1'b1;
        part_slot <= part_slot + 1'b1;
      end
    end
  end

  always_ff @(posedge clk)
    if (loading_sizes && m_out_valid) table_q[sizes_wr[CAW-1:0]] <= m_out[$bits(color_size_t)-1:0];

  // ---- value and index ports: paired line streams
  logic             v_ov, i_ov, pair_ready;
  line_t            v_out, i_out;
  logic             v_busy, i_busy;
  logic [IDX_W-1:0] mat_lines, mat_k, mat_nnz;

  assign msz     = table_q[mat_color];
  assign mat_sz  = msz;
  assign part_sz = psz;

  line_reader u_vrd (
    .clk, .rst_n, .start(start_mat), .base(msz.mat_line), .nlines((msz.nnz + 7) >> 3),
    .req_valid(v_req_valid), .req_ready(v_req_ready), .req_addr(v_req_addr),
    .rsp_valid(v_rsp_valid), .rsp_data(v_rsp_data),
    .out_valid(v_ov), .out_ready(pair_ready), .out_data(v_out), .busy(v_busy)
  );
  line_reader u_ird (
    .clk, .rst_n, .start(start_mat), .base(msz.mat_line), .nlines((msz.nnz + 7) >> 3),
    .req_valid(i_req_valid), .req_ready(i_req_ready), .req_addr(i_req_addr),
    .rsp_valid(i_rsp_valid), .rsp_data(i_rsp_data),
    .out_valid(i_ov), .out_ready(pair_ready), .out_data(i_out), .busy(i_busy)
  );

  logic empty_color;
  assign empty_color = mat_nnz == 0;
  assign mat_busy    = mat_k < mat_lines;
  assign mat_valid   = mat_busy && (empty_color || (v_ov && i_ov));
  assign pair_ready  = mat_valid && mat_ready && !empty_color;

  always_comb begin
    mat.vals  = v_out;
    mat.cols  = i_out[255:0];
    mat.offs  = i_out[511:256];
    for (int k = 0; k < LANES; k++)
      mat.mask[k] = (mat_k * LANES + IDX_W'(k)) < mat_nnz;
    mat.first = mat_k == 0;
    mat.last  = mat_k + 1 == mat_lines;
    if (empty_color) begin
      mat.vals = '0;
      mat.cols = '0;
      mat.offs = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mat_lines <= '0;
      mat_k     <= '0;
      mat_nnz   <= '0;
    end else if (start_mat) begin
      mat_nnz   <= msz.nnz;
      mat_lines <= (msz.nnz == 0) ? 1 : (msz.nnz + 7) >> 3;
      mat_k     <= '0;
    end else if (mat_valid && mat_ready) begin
      mat_k <= mat_k + 1'b1;
    end
  end
endmodule
