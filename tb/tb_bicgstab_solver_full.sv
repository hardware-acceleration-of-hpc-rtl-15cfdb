// tb_bicgstab_solver_full: the solver with every parameter at its default value.
//
// Builds a test problem the way host software would, runs the solver on it
// and checks the answer independently:
//   * A is a 2-D 5-point operator on a 8x8 grid (random non-symmetric
//     coefficients, diagonally dominant) in red-black order, so the rows of
//     each color of L and U only depend on earlier colors.
//   * ILU0 (same pattern as A) is computed here in real arithmetic; L, U and
//     the diagonal are encoded like A: colors as contiguous row blocks, a
//     partition of global vector addresses per color, CSRO lines (values;
//     local column indices and new-row offsets), size-table lines. U and the
//     diagonal are stored in reversed row order.
//   * A reference preconditioned BiCGStab in real arithmetic gives the
//     expected iteration count and solution.
// Memories are behavioural: each read port takes requests with a random
// ready and answers in order after a random delay of 2..9 cycles; the write
// port has a random ready.
// Checks: convergence and iteration count against the reference, x against
// the reference, the true residual |b - A x| / |b|, and exact unit results
// left in memory (y = M^-1 p, v = A y, z = M^-1 s, t = A z, recomputed here
// from the solver's own vectors). A second run with max_iter = 2 checks the
// iteration-limit exit.
module tb_bicgstab_solver_full;
  import fp64_pkg::*;
  import solver_pkg::*;

  localparam int G   = 8;
  localparam int N   = G * G;
  localparam int NL  = (N + 7) / 8;
  localparam int CAWT = 8;
  localparam real IMPROVE = 1.0e-8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------------------------------------------------------- DUT
  logic              start;
  logic [IDX_W-1:0]  n_cfg;
  logic [ADDR_W-1:0] vec_base, vec_stride, a_meta, l_meta, u_meta, diag_base;
  logic [CAWT:0]     a_nc, l_nc, u_nc;
  fp64_t             improve;
  logic [31:0]       max_iter;
  logic              busy, done, converged;
  logic [31:0]       iterations, stall_cycles, overlap_cycles, spmv_passes, ilu_passes, vec_ops, scalar_ops;
  fp64_t             norm;
  logic [4:0]        req_valid, req_ready, rsp_valid;
  logic [4:0][ADDR_W-1:0] req_addr;
  line_t             rsp_data [5];
  logic              vw_valid, vw_ready;
  logic [ADDR_W-1:0] vw_addr;
  line_t             vw_data;
  logic [LANES-1:0]  vw_strb;

  bicgstab_solver dut (
    .clk, .rst_n, .start, .n(n_cfg), .vec_base, .vec_stride,
    .a_meta, .a_ncolors(a_nc), .l_meta, .l_ncolors(l_nc), .u_meta, .u_ncolors(u_nc),
    .diag_base, .desired_improvement(improve), .max_iter,
    .busy, .done, .converged, .iterations, .norm,
    .stall_cycles, .overlap_cycles, .spmv_passes, .ilu_passes, .vec_ops, .scalar_ops,
    .mv_req_valid(req_valid[0]), .mv_req_ready(req_ready[0]), .mv_req_addr(req_addr[0]),
    .mv_rsp_valid(rsp_valid[0]), .mv_rsp_data(rsp_data[0]),
    .mi_req_valid(req_valid[1]), .mi_req_ready(req_ready[1]), .mi_req_addr(req_addr[1]),
    .mi_rsp_valid(rsp_valid[1]), .mi_rsp_data(rsp_data[1]),
    .mm_req_valid(req_valid[2]), .mm_req_ready(req_ready[2]), .mm_req_addr(req_addr[2]),
    .mm_rsp_valid(rsp_valid[2]), .mm_rsp_data(rsp_data[2]),
    .va_req_valid(req_valid[3]), .va_req_ready(req_ready[3]), .va_req_addr(req_addr[3]),
    .va_rsp_valid(rsp_valid[3]), .va_rsp_data(rsp_data[3]),
    .vb_req_valid(req_valid[4]), .vb_req_ready(req_ready[4]), .vb_req_addr(req_addr[4]),
    .vb_rsp_valid(rsp_valid[4]), .vb_rsp_data(rsp_data[4]),
    .vw_valid, .vw_ready, .vw_addr, .vw_data, .vw_strb
  );

  // ---------------------------------------------------------------- memories
  localparam int MLINES = 2048;
  localparam int VLINES = 256;
  line_t mv_mem [MLINES];
  line_t mi_mem [MLINES];
  line_t mm_mem [MLINES];
  line_t vec_mem [VLINES];

  function automatic line_t rd_line(int p, logic [ADDR_W-1:0] a);
    case (p)
      0: return mv_mem[a % MLINES];
      1: return mi_mem[a % MLINES];
      2: return mm_mem[a % MLINES];
      default: return vec_mem[a % VLINES];
    endcase
  endfunction

  typedef struct { logic [ADDR_W-1:0] addr; longint due; } rq_t;
  rq_t rq [5][$];
  longint last_due [5];
  int backpressure = 0, wr_backpressure = 0;

  always @(posedge clk) begin
    if (!rst_n) begin
      req_ready <= '0;
      rsp_valid <= '0;
      vw_ready  <= 1'b0;
      for (int p = 0; p < 5; p++) begin
        rq[p].delete();
        last_due[p] = 0;
      end
    end else begin
      for (int p = 0; p < 5; p++) begin
        rq_t e;
        if (req_valid[p] && req_ready[p]) begin
          e.addr = req_addr[p];
          e.due  = cyc + 2 + longint'($urandom % 8);
          if (e.due <= last_due[p]) e.due = last_due[p] + 1;
          last_due[p] = e.due;
          rq[p].push_back(e);
        end
        if (req_valid[p] && !req_ready[p]) backpressure++;
        req_ready[p] <= ($urandom % 5) != 0;
        rsp_valid[p] <= 1'b0;
        if (rq[p].size() > 0 && rq[p][0].due <= cyc) begin
          rsp_valid[p] <= 1'b1;
          rsp_data[p]  <= rd_line(p, rq[p][0].addr);
          void'(rq[p].pop_front());
        end
      end
      if (vw_valid && vw_ready) begin
        for (int k = 0; k < LANES; k++)
          if (vw_strb[k]) vec_mem[vw_addr % VLINES][64*k +: 64] <= vw_data[64*k +: 64];
      end
      if (vw_valid && !vw_ready) wr_backpressure++;
      vw_ready <= ($urandom % 6) != 0;
    end
  end

  // ---------------------------------------------------------------- host side
  real Am [N][N];
  bit  pat [N][N];
  real LU [N][N];
  real bvec [N];
  int  nred;

  function automatic real rnd01();
    return real'($urandom % 10000) / 10000.0;
  endfunction
  function automatic fp64_t r2f(real r);
    return $realtobits(r);
  endfunction
  function automatic real f2r(fp64_t f);
    return $bitstoreal(f);
  endfunction

  // grid cell -> row in red-black order
  int rowof [G][G];
  task automatic build_matrix();
    int ri, bi;
    ri = 0;
    bi = 0;
    nred = 0;
    for (int y = 0; y < G; y++)
      for (int x = 0; x < G; x++)
        if ((x + y) % 2 == 0) nred++;
    for (int y = 0; y < G; y++)
      for (int x = 0; x < G; x++)
        if ((x + y) % 2 == 0) begin rowof[y][x] = ri; ri++; end
        else begin rowof[y][x] = nred + bi; bi++; end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        Am[i][j] = 0.0;
        pat[i][j] = 1'b0;
      end
    for (int y = 0; y < G; y++)
      for (int x = 0; x < G; x++) begin
        int i;
        i = rowof[y][x];
        Am[i][i]  = 4.5 + rnd01();
        pat[i][i] = 1'b1;
        if (x > 0)     begin Am[i][rowof[y][x-1]] = -(0.4 + 0.6 * rnd01()); pat[i][rowof[y][x-1]] = 1'b1; end
        if (x < G - 1) begin Am[i][rowof[y][x+1]] = -(0.4 + 0.6 * rnd01()); pat[i][rowof[y][x+1]] = 1'b1; end
        if (y > 0)     begin Am[i][rowof[y-1][x]] = -(0.4 + 0.6 * rnd01()); pat[i][rowof[y-1][x]] = 1'b1; end
        if (y < G - 1) begin Am[i][rowof[y+1][x]] = -(0.4 + 0.6 * rnd01()); pat[i][rowof[y+1][x]] = 1'b1; end
      end
    // ILU0 on the pattern of A
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) LU[i][j] = Am[i][j];
    for (int i = 1; i < N; i++)
      for (int k = 0; k < i; k++)
        if (pat[i][k]) begin
          LU[i][k] = LU[i][k] / LU[k][k];
          for (int j = k + 1; j < N; j++)
            if (pat[i][j]) LU[i][j] = LU[i][j] - LU[i][k] * LU[k][j];
        end
    for (int i = 0; i < N; i++) bvec[i] = 1.0 + rnd01();
  endtask

  // entry of matrix w (0 A, 1 L, 2 U reversed) at stored row r, vector address g
  function automatic bit has_ent(int w, int r, int g);
    int i;
    i = (w == 2) ? N - 1 - r : r;
    case (w)
      0: return pat[i][g];
      1: return g < i && pat[i][g];
      default: return g > i && pat[i][g];
    endcase
  endfunction
  function automatic real ent(int w, int r, int g);
    int i;
    i = (w == 2) ? N - 1 - r : r;
    return (w == 0) ? Am[i][g] : LU[i][g];
  endfunction

  int mm_next = 0, mx_next = 0;
  int empty_colors_built = 0;

  // color c of matrix w covers stored rows [r0, r0+nr)
  task automatic encode_color(int w, int meta, int c, int r0, int nr);
    int part [$];
    int loc [N];
    int nnz, pl, ml, prev, k;
    line_t sl, vl, il;
    for (int g = 0; g < N; g++) loc[g] = -1;
    nnz = 0;
    for (int r = r0; r < r0 + nr; r++)
      for (int g = 0; g < N; g++)
        if (has_ent(w, r, g)) begin
          nnz++;
          if (loc[g] < 0) begin loc[g] = 0; end
        end
    for (int g = 0; g < N; g++)
      if (loc[g] >= 0) begin loc[g] = part.size(); part.push_back(g); end
    pl = mm_next;
    for (int q = 0; q < part.size(); q++)
      mm_mem[pl + q / 16][32 * (q % 16) +: 32] = 32'(part[q]);
    mm_next = pl + (part.size() + 15) / 16;
    ml = mx_next;
    k = 0;
    prev = r0 - 1;
    vl = '0;
    il = '0;
    for (int r = r0; r < r0 + nr; r++)
      for (int g = 0; g < N; g++)
        if (has_ent(w, r, g)) begin
          vl[64 * (k % 8) +: 64] = r2f(ent(w, r, g));
          il[32 * (k % 8) +: 32] = 32'(loc[g]);
          il[256 + 32 * (k % 8) +: 32] = 32'(r - prev);
          prev = r;
          k++;
          if (k % 8 == 0) begin
            mv_mem[mx_next] = vl;
            mi_mem[mx_next] = il;
            mx_next++;
            vl = '0;
            il = '0;
          end
        end
    if (k % 8 != 0) begin
      for (int q = k % 8; q < 8; q++) vl[64 * q +: 64] = FP64_QNAN;  // padding lanes are masked
      mv_mem[mx_next] = vl;
      mi_mem[mx_next] = il;
      mx_next++;
    end
    if (nnz == 0) empty_colors_built++;
    sl = '0;
    sl[31:0]    = 32'(r0);
    sl[63:32]   = 32'(nr);
    sl[95:64]   = 32'(nnz);
    sl[127:96]  = 32'(part.size());
    sl[159:128] = 32'(ml);
    sl[191:160] = 32'(pl);
    mm_mem[meta + c] = sl;
  endtask

  // colors: rows [0, split) in chunks of c1, rows [split, N) in chunks of c2
  task automatic encode_matrix(int w, int split, int c1, int c2, output int meta, output int nc);
    int r, cnt;
    int r0s [$];
    int nrs [$];
    r = 0;
    while (r < N) begin
      cnt = (r < split) ? c1 : c2;
      if (r < split && r + cnt > split) cnt = split - r;
      if (r + cnt > N) cnt = N - r;
      r0s.push_back(r);
      nrs.push_back(cnt);
      r += cnt;
    end
    nc = r0s.size();
    meta = mm_next;
    mm_next += nc;
    for (int c = 0; c < nc; c++) encode_color(w, meta, c, r0s[c], nrs[c]);
  endtask

  // ---------------------------------------------------------------- reference
  function automatic real dotv(real a [N], real b [N]);
    real s;
    s = 0.0;
    for (int i = 0; i < N; i++) s += a[i] * b[i];
    return s;
  endfunction
  task automatic spmv_ref(input real x [N], output real y [N]);
    for (int i = 0; i < N; i++) begin
      y[i] = 0.0;
      for (int j = 0; j < N; j++) if (pat[i][j]) y[i] += Am[i][j] * x[j];
    end
  endtask
  task automatic ilu_ref(input real p [N], output real z [N]);
    real y [N];
    for (int i = 0; i < N; i++) begin
      y[i] = p[i];
      for (int k = 0; k < i; k++) if (pat[i][k]) y[i] -= LU[i][k] * y[k];
    end
    for (int i = N - 1; i >= 0; i--) begin
      z[i] = y[i];
      for (int j = i + 1; j < N; j++) if (pat[i][j]) z[i] -= LU[i][j] * z[j];
      z[i] = z[i] / LU[i][i];
    end
  endtask

  real xref [N];
  int  ref_iters;
  task automatic bicgstab_ref(int maxit);
    real r [N], rh [N], p [N], v [N], y [N], s [N], z [N], t [N], h [N];
    real rho, rho_new, alpha, omega, beta, nrm, thr;
    for (int i = 0; i < N; i++) begin
      xref[i] = 0.0; r[i] = bvec[i]; rh[i] = bvec[i]; p[i] = 0.0; v[i] = 0.0;
    end
    rho = 1.0; alpha = 1.0; omega = 1.0;
    nrm = dotv(r, r);
    thr = IMPROVE * IMPROVE * nrm;
    ref_iters = 0;
    while (nrm > thr && ref_iters < maxit) begin
      rho_new = dotv(rh, r);
      beta = (rho_new / rho) * (alpha / omega);
      for (int i = 0; i < N; i++) p[i] = (ref_iters == 0) ? r[i] : r[i] + beta * (p[i] - omega * v[i]);
      ilu_ref(p, y);
      spmv_ref(y, v);
      alpha = rho_new / dotv(rh, v);
      for (int i = 0; i < N; i++) begin
        h[i] = xref[i] + alpha * y[i];
        s[i] = r[i] - alpha * v[i];
      end
      ilu_ref(s, z);
      spmv_ref(z, t);
      omega = dotv(t, s) / dotv(t, t);
      for (int i = 0; i < N; i++) begin
        xref[i] = h[i] + omega * z[i];
        r[i] = s[i] - omega * t[i];
      end
      nrm = dotv(r, r);
      rho = rho_new;
      ref_iters++;
    end
  endtask

  // ---------------------------------------------------------------- helpers
  int stride;
  function automatic real vget(int vid, int i);
    return f2r(vec_mem[vid * stride + i / 8][64 * (i % 8) +: 64]);
  endfunction
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask
  function automatic real rel_err(real a [N], real b [N]);
    real e, m;
    e = 0.0;
    m = 1.0e-300;
    for (int i = 0; i < N; i++) begin
      if ((a[i] - b[i]) > e) e = a[i] - b[i];
      if ((b[i] - a[i]) > e) e = b[i] - a[i];
      if (b[i] > m) m = b[i];
      if (-b[i] > m) m = -b[i];
    end
    return e / m;
  endfunction
  task automatic check_units();
    real p [N], y [N], v [N], s [N], z [N], t [N], e1 [N], e2 [N];
    for (int i = 0; i < N; i++) begin
      p[i] = vget(3, i); y[i] = vget(5, i); v[i] = vget(4, i);
      s[i] = vget(6, i); z[i] = vget(7, i); t[i] = vget(8, i);
    end
    ilu_ref(p, e1);
    check(rel_err(y, e1) < 1.0e-12, "y = M^-1 p");
    spmv_ref(y, e2);
    check(rel_err(v, e2) < 1.0e-12, "v = A y");
    ilu_ref(s, e1);
    check(rel_err(z, e1) < 1.0e-12, "z = M^-1 s");
    spmv_ref(z, e2);
    check(rel_err(t, e2) < 1.0e-12, "t = A z");
  endtask

  // ---------------------------------------------------------------- mechanism monitors
  int ev_empty_color = 0, ev_cross_row = 0, ev_hold = 0, ev_dot2 = 0, ev_axpy_norm = 0;
  int ev_fwd = 0, ev_bwd = 0, ev_spmv = 0, ev_special = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_mou.u_ers.mat_valid && dut.u_mou.u_ers.mat_ready && dut.u_mou.u_ers.empty_color) ev_empty_color++;
    if (dut.u_mou.u_spmv.red_v) ev_cross_row++;
    if (dut.u_vou.u0.a7v && dut.u_vou.u0.h_v && !(dut.u_vou.u0.t_v && dut.u_vou.u0.y_v)) ev_hold++;
    if (dut.vo_start && dut.ir.vm == VM_DOT2) ev_dot2++;
    if (dut.vo_start && dut.ir.vm == VM_AXPY_NORM) ev_axpy_norm++;
    if (dut.mo_start && dut.ir.mop == MOP_ILU_FWD) ev_fwd++;
    if (dut.mo_start && dut.ir.mop == MOP_ILU_BWD) ev_bwd++;
    if (dut.mo_start && dut.ir.mop == MOP_SPMV) ev_spmv++;
  end

  // ---------------------------------------------------------------- run
  task automatic run(int maxit, output longint cycles);
    longint t0;
    max_iter = 32'(maxit);
    @(posedge clk);
    start <= 1'b1;
    t0 = cyc;
    @(posedge clk);
    start <= 1'b0;
    while (!done) @(posedge clk);
    cycles = cyc - t0;
  endtask

  initial begin
    int am, lm, um, anc, lnc, unc;
    longint cycles;
    real xs [N], ax [N], res, bn;
    void'($urandom(11));
    start = 1'b0;
    max_iter = 32'd0;
    for (int i = 0; i < MLINES; i++) begin mv_mem[i] = '0; mi_mem[i] = '0; mm_mem[i] = '0; end
    for (int i = 0; i < VLINES; i++) vec_mem[i] = '0;
    build_matrix();
    encode_matrix(0, N, 7, 7, am, anc);
    encode_matrix(1, nred, 8, 5, lm, lnc);
    encode_matrix(2, N - nred, 8, 5, um, unc);
    stride = NL + 1;
    for (int i = 0; i < N; i++) vec_mem[i / 8][64 * (i % 8) +: 64] = r2f(bvec[i]);
    for (int r = 0; r < N; r++)
      vec_mem[11 * stride + r / 8][64 * (r % 8) +: 64] = r2f(LU[N - 1 - r][N - 1 - r]);
    n_cfg = N;
    vec_base = 0;
    vec_stride = stride;
    a_meta = am; l_meta = lm; u_meta = um;
    a_nc = anc; l_nc = lnc; u_nc = unc;
    diag_base = 11 * stride;
    improve = r2f(IMPROVE);
    bicgstab_ref(50);
    $display("matrix: N=%0d colors A/L/U=%0d/%0d/%0d, reference iterations=%0d", N, anc, lnc, unc, ref_iters);
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);

    // run 1: to convergence
    run(50, cycles);
    $display("run 1: %0d cycles, iterations=%0d converged=%0d norm=%g", cycles, iterations, converged, f2r(norm));
    check(converged == 1'b1, "converged");
    check(iterations + 1 >= ref_iters && iterations <= ref_iters + 1, "iteration count vs reference");
    for (int i = 0; i < N; i++) xs[i] = vget(1, i);
    check(rel_err(xs, xref) < 1.0e-6, "x vs reference solution");
    spmv_ref(xs, ax);
    res = 0.0;
    bn = 0.0;
    for (int i = 0; i < N; i++) begin
      res += (bvec[i] - ax[i]) * (bvec[i] - ax[i]);
      bn += bvec[i] * bvec[i];
    end
    check($sqrt(res / bn) < IMPROVE * 10.0, "true residual");
    check(f2r(norm) <= IMPROVE * $sqrt(bn) * 1.000001, "reported norm below threshold");
    check(spmv_passes == 2 * iterations, "two SpMV passes per iteration");
    check(ilu_passes == 4 * iterations, "four substitution passes per iteration");
    check_units();

    // run 2: iteration limit
    run(2, cycles);
    $display("run 2: %0d cycles, iterations=%0d converged=%0d", cycles, iterations, converged);
    check(converged == 1'b0, "limit run not converged");
    check(iterations == 2, "limit run stops after 2 iterations");
    check_units();

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(40000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
