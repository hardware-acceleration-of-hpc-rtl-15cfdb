// tb_matrix_op_unit: one SpMV pass and one forward-substitution pass over
// random sparse matrices held in behavioural memories (random ready,
// in-order responses after random delays; random write-port ready).
// SpMV: a 60-row matrix with empty rows and rows longer than a line, in
// colors of 6 rows, integer values (exact in double); the result lines on
// the write port must equal A x row by row (empty rows 0). The pass must
// overlap gathers with streaming and, with a small window, stall.
// Forward pass: a strictly lower matrix whose colors only reference rows
// of earlier colors; the on-chip vector must end as y = p - L y, compared
// with a serial reference within 1e-12.
module tb_matrix_op_unit;
  import fp64_pkg::*;
  import solver_pkg::*;
  localparam int MC = 16, CAW = 4, VD = 64, UAW = 8, N = 60, ML = 1024;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;

  logic start, busy, done;
  mop_e mode;
  logic [ADDR_W-1:0] meta_base, diag_base, res_base;
  logic [CAW:0] ncolors;
  logic [IDX_W-1:0] n;
  logic v_req_valid, v_req_ready, v_rsp_valid, i_req_valid, i_req_ready, i_rsp_valid;
  logic m_req_valid, m_req_ready, m_rsp_valid, d_req_valid, d_req_ready, d_rsp_valid;
  logic [ADDR_W-1:0] v_req_addr, i_req_addr, m_req_addr, d_req_addr, wr_addr;
  line_t v_rsp_data, i_rsp_data, m_rsp_data, d_rsp_data, wr_data;
  logic wr_valid, wr_ready;
  logic [LANES-1:0] wr_strb;
  logic u0_en, u1_en, u1_we;
  logic [UAW-1:0] u0_addr, u1_addr;
  fp64_t u0_rdata, u1_rdata, u1_wdata;
  logic [31:0] stall_cycles, overlap_cycles, colors_done;
  matrix_op_unit #(.MAX_COLORS(MC), .VPM_DEPTH(VD), .WIN(16), .UAW(UAW)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // memories
  line_t vmem [ML], imem [ML], mmem [ML], rmem [64];
  fp64_t uram [1 << UAW];
  always @(posedge clk) begin
    if (u0_en) u0_rdata <= uram[u0_addr];
    if (u1_en && u1_we) uram[u1_addr] <= u1_wdata;
    if (u1_en && !u1_we) u1_rdata <= uram[u1_addr];
  end
  typedef struct { logic [ADDR_W-1:0] a; longint due; } rq_t;
  rq_t q [3][$];
  longint last [3];
  logic [2:0] rv, rr;
  logic [2:0][ADDR_W-1:0] ra;
  assign rv = {m_req_valid, i_req_valid, v_req_valid};
  assign ra = {m_req_addr, i_req_addr, v_req_addr};
  assign {m_req_ready, i_req_ready, v_req_ready} = rr;
  assign d_req_ready = 1'b0;
  assign d_rsp_valid = 1'b0;
  assign d_rsp_data  = '0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) begin
      rr <= '0; v_rsp_valid <= 0; i_rsp_valid <= 0; m_rsp_valid <= 0; wr_ready <= 0;
      for (int p = 0; p < 3; p++) last[p] = 0;
    end else begin
      logic [2:0] ov;
      line_t od [3];
      for (int p = 0; p < 3; p++) begin
        rq_t e;
        ov[p] = 0;
        od[p] = '0;
        if (rv[p] && rr[p]) begin
          e.a = ra[p];
          e.due = cyc + 2 + longint'($urandom % 6);
          if (e.due <= last[p]) e.due = last[p] + 1;
          last[p] = e.due;
          q[p].push_back(e);
        end
        if (q[p].size() > 0 && q[p][0].due <= cyc) begin
          ov[p] = 1;
          od[p] = (p == 0) ? vmem[q[p][0].a % ML] : (p == 1) ? imem[q[p][0].a % ML] : mmem[q[p][0].a % ML];
          void'(q[p].pop_front());
        end
      end
      {m_rsp_valid, i_rsp_valid, v_rsp_valid} <= ov;
      v_rsp_data <= od[0]; i_rsp_data <= od[1]; m_rsp_data <= od[2];
      rr <= 3'($urandom);
      if (wr_valid && wr_ready)
        for (int k = 0; k < 8; k++) if (wr_strb[k]) rmem[wr_addr % 64][64*k +: 64] <= wr_data[64*k +: 64];
      wr_ready <= ($urandom % 8) == 0;
    end
  end

  // matrix construction
  real M [N][N];
  int mm_next = 0, mx_next = 0;
  task automatic encode(int r0, int nr, int meta, int c);
    int loc [N];
    int part [$];
    int nnz, k, prev, pl, ml;
    line_t vl, il, sl;
    for (int g = 0; g < N; g++) loc[g] = -1;
    nnz = 0;
    for (int r = r0; r < r0 + nr; r++)
      for (int g = 0; g < N; g++) if (M[r][g] != 0.0) begin nnz++; loc[g] = 0; end
    for (int g = 0; g < N; g++) if (loc[g] >= 0) begin loc[g] = part.size(); part.push_back(g); end
    pl = mm_next;
    for (int i = 0; i < part.size(); i++) mmem[pl + i / 16][32 * (i % 16) +: 32] = 32'(part[i]);
    mm_next += (part.size() + 15) / 16;
    ml = mx_next;
    k = 0; prev = r0 - 1; vl = '0; il = '0;
    for (int r = r0; r < r0 + nr; r++)
      for (int g = 0; g < N; g++) if (M[r][g] != 0.0) begin
        vl[64 * (k % 8) +: 64] = $realtobits(M[r][g]);
        il[32 * (k % 8) +: 32] = 32'(loc[g]);
        il[256 + 32 * (k % 8) +: 32] = 32'(r - prev);
        prev = r;
        k++;
        if (k % 8 == 0) begin vmem[mx_next] = vl; imem[mx_next] = il; mx_next++; vl = '0; il = '0; end
      end
    if (k % 8 != 0) begin vmem[mx_next] = vl; imem[mx_next] = il; mx_next++; end
    sl = '0;
    sl[31:0] = 32'(r0); sl[63:32] = 32'(nr); sl[95:64] = 32'(nnz);
    sl[127:96] = 32'(part.size()); sl[159:128] = 32'(ml); sl[191:160] = 32'(pl);
    mmem[meta + c] = sl;
  endtask

  task automatic run_pass(mop_e m, int meta, int nc);
    @(posedge clk); #1;
    mode = m; meta_base = ADDR_W'(meta); ncolors = 5'(nc); start = 1;
    @(posedge clk); #1;
    start = 0;
    while (!done) begin @(posedge clk); #1; end
  endtask

  initial begin
    real x [N], y [N], e;
    int meta, nc;
    start = 0; mode = MOP_SPMV; meta_base = 0; diag_base = 0; res_base = 0; ncolors = 0; n = N;
    u0_rdata = '0; u1_rdata = '0;
    for (int i = 0; i < ML; i++) begin vmem[i] = '0; imem[i] = '0; mmem[i] = '0; end
    for (int i = 0; i < 64; i++) rmem[i] = {8{FP64_QNAN}};
    // SpMV matrix
    for (int r = 0; r < N; r++) begin
      int len;
      len = (r % 9 == 4) ? 0 : (r % 11 == 2) ? 13 : int'($urandom % 6);
      for (int g = 0; g < N; g++) M[r][g] = 0.0;
      for (int j = 0; j < len; j++) M[r][$urandom % N] = real'(int'($urandom % 19) - 9) + 0.5;
    end
    for (int g = 0; g < N; g++) begin x[g] = real'(int'($urandom % 21) - 10); uram[g] = $realtobits(x[g]); end
    meta = 0; nc = N / 30; mm_next = nc;
    for (int c = 0; c < nc; c++) encode(30 * c, 30, meta, c);
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_pass(MOP_SPMV, meta, nc);
    for (int r = 0; r < N; r++) begin
      e = 0.0;
      for (int g = 0; g < N; g++) e += M[r][g] * x[g];
      check($bitstoreal(rmem[r / 8][64 * (r % 8) +: 64]) == e, $sformatf("spmv row %0d", r));
    end
    check(colors_done == nc, "colors counted");
    check(stall_cycles > 0, "window stall");
    check(overlap_cycles > 0, "look-ahead overlap");
    // forward substitution: colors of 10 rows, L only references earlier colors
    for (int r = 0; r < N; r++) begin
      for (int g = 0; g < N; g++) M[r][g] = 0.0;
      if (r >= 10)
        for (int j = 0; j < 3; j++) M[r][$urandom % ((r / 10) * 10)] = (real'(int'($urandom % 17)) - 8.0) / 16.0;
    end
    for (int g = 0; g < N; g++) begin x[g] = real'(int'($urandom % 21) - 10); uram[g] = $realtobits(x[g]); end
    meta = mm_next; mm_next += 6;
    for (int c = 0; c < 6; c++) encode(10 * c, 10, meta, c);
    run_pass(MOP_ILU_FWD, meta, 6);
    for (int r = 0; r < N; r++) begin
      y[r] = x[r];
      for (int g = 0; g < r; g++) y[r] -= M[r][g] * y[g];
      e = $bitstoreal(uram[r]) - y[r];
      if (e < 0.0) e = -e;
      check(e <= 1.0e-12 * (1.0 + (y[r] < 0.0 ? -y[r] : y[r])), $sformatf("forward row %0d", r));
    end
    $display("stalls=%0d overlap=%0d", stall_cycles, overlap_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
