// spmv_pipeline: the SpMV unit - the streaming core shared by SpMV and the
// ILU0 substitutions.
//
// Every cycle one CSRO line (8 non-zeros with their column indices and
// new-row offsets) can enter. The column indices address the vector
// partition memories (one per two multipliers, all holding the same
// partition) while the non-zero values wait one cycle, the memories'
// latency, so value and vector element meet at the multipliers together.
// Products go through the selective adder tree (rows within the line), the
// reduce unit (rows that cross lines) and the merge unit, which delivers up
// to NOUT finished (row, value) results per cycle, in no particular order.
// Alongside, the frontier of the line (all rows below it are finished and
// delivered) leaves with the results of that line.
//
// Latency from acceptance to results: 1 (memory) + MUL_LAT + log2(LANES)
// (adder tree) + 1 (reduce) + 1 (merge) cycles.
//
// Flow control: the results go into a write buffer of WIN rows starting at
// wr_base. A line is accepted only when all its rows lie below
// wr_base + WIN, otherwise in_ready is low and the line waits (a stall);
// rows can then never overrun the buffer. One line may not span WIN rows.
//
// Structure and unit names follow the source's SpMV-unit schematic; delays
// and the stall rule are this design's choices.
module spmv_pipeline
  import fp64_pkg::*;
  import solver_pkg::*;
#(
  parameter int MUL_LAT   = 2,
  parameter int VPM_DEPTH = 4096,
  parameter int WIN       = 512
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  mat_line_t                   in_line,
  input  logic [IDX_W-1:0]            color_row0,
  input  logic [IDX_W-1:0]            color_rows,
  input  logic [IDX_W-1:0]            wr_base,
  input  logic                        vpm_we,
  input  logic [$clog2(VPM_DEPTH)-1:0] vpm_waddr,
  input  fp64_t                       vpm_wdata,
  output logic [NOUT-1:0]             res_valid,
  output logic [NOUT-1:0][IDX_W-1:0]  res_row,
  output logic [NOUT-1:0][63:0]       res_val,
  output logic                        fr_valid,
  output logic [IDX_W-1:0]            frontier,
  output logic                        busy,
  output logic                        stall      // a line waits for buffer room
);
  localparam int NVPM = LANES / 2;
  localparam int AW   = $clog2(VPM_DEPTH);
  localparam int LL   = $clog2(LANES);

  typedef struct packed {
    logic             valid;
    logic [LANES-1:0] mask;
    iline_t           row;
    logic [LANES-1:0] seg_head;
    logic [LANES-1:0] direct;
    logic             cont;
    logic [LL-1:0]    head_lane;
    logic             head_is_tail;
    logic             tail_open;
    logic             empty;
    logic [IDX_W-1:0] frontier;
  } ctrl_t;

  // ---------------- stage 0: decode, memory read ----------------
  ctrl_t            c0;
  logic             accept;
  iline_t           row0;
  logic [LANES-1:0] seg_head0, seg_end0, direct0;
  logic             cont0, hit0, to0, empty0;
  logic [LL-1:0]    hl0;
  logic [IDX_W-1:0] fr0;

  spmv_control_unit u_ctrl (
    .clk, .rst_n, .accept,
    .offs(in_line.offs), .mask(in_line.mask), .first(in_line.first), .last(in_line.last),
    .color_row0, .color_rows,
    .row(row0), .seg_head(seg_head0), .seg_end(seg_end0), .direct(direct0),
    .cont(cont0), .head_lane(hl0), .head_is_tail(hit0), .tail_open(to0),
    .empty(empty0), .frontier(fr0)
  );

  assign in_ready = empty0 || (row0[LANES-1] < wr_base + IDX_W'(WIN));
  assign accept   = in_valid && in_ready;
  assign stall    = in_valid && !in_ready;

  always_comb begin
    c0.valid        = accept;
    c0.mask         = in_line.mask;
    c0.row          = row0;
    c0.seg_head     = seg_head0;
    c0.direct       = direct0;
    c0.cont         = cont0;
    c0.head_lane    = hl0;
    c0.head_is_tail = hit0;
    c0.tail_open    = to0;
    c0.empty        = empty0;
    c0.frontier     = fr0;
  end

  vline_t vpm_q;
  for (genvar m = 0; m < NVPM; m++) begin : g_vpm
    vector_partition_memory #(.DEPTH(VPM_DEPTH)) u_vpm (
      .clk, .we(vpm_we), .waddr(vpm_waddr), .wdata(vpm_wdata),
      .raddr0(in_line.cols[2*m][AW-1:0]),   .rdata0(vpm_q[2*m]),
      .raddr1(in_line.cols[2*m+1][AW-1:0]), .rdata1(vpm_q[2*m+1])
    );
  end

  // ---------------- stage 1: multiply ----------------
  ctrl_t  c1;
  vline_t vals1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) c1 <= '0;
    else        c1 <= c0;
  end
  always_ff @(posedge clk) vals1 <= in_line.vals;

  vline_t           prod;
  logic [LANES-1:0] prod_v;
  for (genvar k = 0; k < LANES; k++) begin : g_mul
    fp64_mul #(.LAT(MUL_LAT)) u_mul (
      .clk, .rst_n, .in_valid(c1.valid), .a(vals1[k]), .b(vpm_q[k]),
      .out_valid(prod_v[k]), .y(prod[k])
    );
  end

  ctrl_t c2;   // aligned with the products
  pipe_delay #(.W($bits(ctrl_t)), .N(MUL_LAT)) u_d2 (.clk, .rst_n, .d(c1), .q(c2));

  // padding lanes contribute exactly zero
  vline_t prod_m;
  always_comb
    for (int k = 0; k < LANES; k++) prod_m[k] = c2.mask[k] ? prod[k] : FP64_ZERO;

  // ---------------- selective adder tree ----------------
  logic   sat_v;
  vline_t sat_s;
  selective_adder_tree u_sat (
    .clk, .rst_n, .in_valid(c2.valid), .in_val(prod_m), .in_head(c2.seg_head),
    .out_valid(sat_v), .out_sum(sat_s)
  );
  ctrl_t c3;
  pipe_delay #(.W($bits(ctrl_t)), .N(LL)) u_d3 (.clk, .rst_n, .d(c2), .q(c3));

  // ---------------- reduce ----------------
  logic             red_v, red_open;
  logic [IDX_W-1:0] red_row;
  fp64_t            red_val;
  reduce_unit u_red (
    .clk, .rst_n, .in_valid(c3.valid), .empty(c3.empty), .cont(c3.cont),
    .head_is_tail(c3.head_is_tail), .tail_open(c3.tail_open),
    .head_sum(sat_s[c3.head_lane]), .tail_sum(sat_s[LANES-1]), .tail_row(c3.row[LANES-1]),
    .out_valid(red_v), .out_row(red_row), .out_val(red_val), .open(red_open)
  );
  ctrl_t  c4;
  vline_t sat4;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) c4 <= '0;
    else        c4 <= c3;
  end
  always_ff @(posedge clk) sat4 <= sat_s;

  // ---------------- merge ----------------
  merge_unit u_merge (
    .clk, .rst_n,
    .lane_valid(c4.valid ? c4.direct : '0), .lane_row(c4.row), .lane_val(sat4),
    .red_valid(red_v), .red_row, .red_val,
    .out_valid(res_valid), .out_row(res_row), .out_val(res_val)
  );
  ctrl_t c5;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) c5 <= '0;
    else        c5 <= c4;
  end
  assign fr_valid = c5.valid;
  assign frontier = c5.frontier;

  // lines in flight
  logic [7:0] inflight;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else        inflight <= inflight + 8'(accept) - 8'(c5.valid);
  end
  assign busy = inflight != '0 || red_open;

  // unused by design: adder-tree valid equals c3.valid, segment ends are in direct
  logic unused;
  assign unused = ^{sat_v, seg_end0, prod_v};
endmodule
