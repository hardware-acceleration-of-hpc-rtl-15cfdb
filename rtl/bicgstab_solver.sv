// bicgstab_solver: ILU0-preconditioned BiCGStab solver, top level.
//
// Main idea: every step of the Krylov loop is one of three kinds of task -
// a sparse matrix pass (SpMV with A, or an ILU0 substitution pass with L or
// U), a streaming vector operation (axpy / dot), or a scalar operation - and
// a small fixed microprogram sequences them. Vectors live in off-chip
// memory; the sparse passes work on one vector held once in the on-chip
// vector memory, which needs no off-chip traffic for the vector in between
// the ILU0 passes and the SpMV that follows them.
//
// Algorithm (x0 = 0, rhat = r0 = b, rho = alpha = omega = 1):
//   loop while ||r||^2 > (desired_improvement^2) * ||r0||^2 and iter < max_iter
//     rho_new = rhat.r ; beta = (rho_new/rho) * (alpha/omega)
//     p = r + beta (p - omega v)           (first iteration: p = r)
//     y = U\(L\p) ; v = A y ; alpha = rho_new / (rhat.v)
//     h = x + alpha y ; s = r - alpha v
//     z = U\(L\s) ; t = A z ; omega = (t.s) / (t.t)
//     x = h + omega z ; r = s - omega t, ||r||^2 in the same pass ; rho = rho_new
// On exit: done pulses, converged says whether the threshold was met,
// iterations holds the count and norm = ||r||.
//
// Memory ports (request/response line ports as in line_reader; writes take
// a line with 8 lane strobes when wr_valid && wr_ready):
//   mv_/mi_/mm_ : matrix values, matrix indices, matrix meta data (reads)
//   va_/vb_     : vector reads (va_ also fetches the ILU0 diagonal)
//   vw_         : vector writes (vector ops, SpMV results, ILU0 results)
// Vector k (k = 0 b, 1 x, 2 r, 3 p, 4 v, 5 y, 6 s, 7 z, 8 t, 9 h, 10 tmp)
// starts at line vec_base + k * vec_stride and spans ceil(n/8) lines.
// Matrices A, L (strictly lower) and U (strictly upper, rows and diagonal in
// reversed order) are given by their size-table address and color count.
//
// Following the source: the unit split (matrix operation unit with SpMV and
// ILU0 modes, on-chip vector memory, vector ops unit of two dot_axpy units,
// floating-point scalar unit, variable registers) and the preconditioned
// BiCGStab loop. This design's choices: the textbook form of BiCGStab (the
// source's listing has argument-order slips and starts with rho = 0), a
// combined residual/norm pass, five read ports and one write port, and the
// convergence test on squared norms.
module bicgstab_solver
  import fp64_pkg::*;
  import solver_pkg::*;
#(
  parameter int MAX_COLORS = 256,
  parameter int VPM_DEPTH  = 4096,
  parameter int WIN        = 512,
  parameter int URAM_DEPTH = 262144,
  parameter int MUL_LAT    = 2,
  parameter int ADD_LAT    = 2,
  parameter int UAW        = $clog2(URAM_DEPTH),
  parameter int CAW        = $clog2(MAX_COLORS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              start,
  input  logic [IDX_W-1:0]  n,
  input  logic [ADDR_W-1:0] vec_base,
  input  logic [ADDR_W-1:0] vec_stride,
  input  logic [ADDR_W-1:0] a_meta,
  input  logic [CAW:0]      a_ncolors,
  input  logic [ADDR_W-1:0] l_meta,
  input  logic [CAW:0]      l_ncolors,
  input  logic [ADDR_W-1:0] u_meta,
  input  logic [CAW:0]      u_ncolors,
  input  logic [ADDR_W-1:0] diag_base,
  input  fp64_t             desired_improvement,
  input  logic [31:0]       max_iter,
  // status
  output logic              busy,
  output logic              done,
  output logic              converged,
  output logic [31:0]       iterations,
  output fp64_t             norm,
  output logic [31:0]       stall_cycles,
  output logic [31:0]       overlap_cycles,
  output logic [31:0]       spmv_passes,
  output logic [31:0]       ilu_passes,
  output logic [31:0]       vec_ops,
  output logic [31:0]       scalar_ops,
  // matrix read ports
  output logic              mv_req_valid,
  input  logic              mv_req_ready,
  output logic [ADDR_W-1:0] mv_req_addr,
  input  logic              mv_rsp_valid,
  input  line_t             mv_rsp_data,
  output logic              mi_req_valid,
  input  logic              mi_req_ready,
  output logic [ADDR_W-1:0] mi_req_addr,
  input  logic              mi_rsp_valid,
  input  line_t             mi_rsp_data,
  output logic              mm_req_valid,
  input  logic              mm_req_ready,
  output logic [ADDR_W-1:0] mm_req_addr,
  input  logic              mm_rsp_valid,
  input  line_t             mm_rsp_data,
  // vector read ports
  output logic              va_req_valid,
  input  logic              va_req_ready,
  output logic [ADDR_W-1:0] va_req_addr,
  input  logic              va_rsp_valid,
  input  line_t             va_rsp_data,
  output logic              vb_req_valid,
  input  logic              vb_req_ready,
  output logic [ADDR_W-1:0] vb_req_addr,
  input  logic              vb_rsp_valid,
  input  line_t             vb_rsp_data,
  // vector write port
  output logic              vw_valid,
  input  logic              vw_ready,
  output logic [ADDR_W-1:0] vw_addr,
  output line_t             vw_data,
  output logic [LANES-1:0]  vw_strb
);
  // ------------------------------------------------------------ microprogram
  typedef enum logic [3:0] {
    I_INIT, I_LDC, I_VOP, I_MAT, I_SOP, I_MOV, I_CHK, I_JFIRST, I_LOOP, I_END
  } iop_e;
  typedef enum logic [1:0] { A_VAR, A_NEG, A_ZERO, A_MONE } asrc_e;
  typedef enum logic [1:0] { M_A, M_L, M_U } msel_e;
  typedef enum logic [3:0] {
    VB = 4'd0, VX = 4'd1, VR = 4'd2, VP = 4'd3, VV = 4'd4, VY = 4'd5,
    VS = 4'd6, VZ = 4'd7, VT = 4'd8, VH = 4'd9, VTMP = 4'd10
  } vid_e;
  typedef struct packed {
    iop_e   op;
    vmode_e vm;
    asrc_e  asrc;
    var_e   sa, sb, sd;   // scalar sources / destination; sd also d1 target
    var_e   d0;           // dot result 0 target
    vid_e   va, vb, vd;
    mop_e   mop;
    msel_e  msel;
    logic   fill, dump;
    sop_e   sop;
    logic [4:0] target;
  } instr_t;

  function automatic instr_t nop();
    instr_t i;
    i = '0;
    i.op = I_END;
    return i;
  endfunction
  function automatic instr_t vop(vmode_e m, asrc_e as, var_e s, vid_e a, vid_e b, vid_e d,
                                 var_e d0, var_e d1);
    instr_t i;
    i = nop(); i.op = I_VOP; i.vm = m; i.asrc = as; i.sa = s;
    i.va = a; i.vb = b; i.vd = d; i.d0 = d0; i.sd = d1;
    return i;
  endfunction
  function automatic instr_t mat(mop_e m, msel_e ms, logic f, logic dp, vid_e src, vid_e dst);
    instr_t i;
    i = nop(); i.op = I_MAT; i.mop = m; i.msel = ms; i.fill = f; i.dump = dp;
    i.va = src; i.vd = dst;
    return i;
  endfunction
  function automatic instr_t sop(sop_e o, var_e a, var_e b, var_e d);
    instr_t i;
    i = nop(); i.op = I_SOP; i.sop = o; i.sa = a; i.sb = b; i.sd = d;
    return i;
  endfunction
  function automatic instr_t ctl(iop_e o, logic [4:0] t);
    instr_t i;
    i = nop(); i.op = o; i.target = t;
    return i;
  endfunction

  localparam logic [4:0] PC_CHK = 5'd6, PC_FIRST = 5'd14, PC_PRE = 5'd15, PC_END = 5'd31;

  function automatic instr_t ucode(logic [4:0] pc);
    case (pc)
      5'd0:  return ctl(I_INIT, 5'd0);
      5'd1:  return ctl(I_LDC, 5'd0);                                          // conv = improvement
      5'd2:  return vop(VM_AXPY_NORM, A_ZERO, V_TMP, VB, VB, VR, V_TMP, V_NORM); // r = b, |r|^2
      5'd3:  return vop(VM_AXPY, A_MONE, V_TMP, VB, VB, VX, V_TMP, V_TMP);       // x = 0
      5'd4:  return sop(SOP_MUL, V_CONV, V_CONV, V_CONV);
      5'd5:  return sop(SOP_MUL, V_CONV, V_NORM, V_CONV);
      5'd6:  return ctl(I_CHK, PC_END);
      5'd7:  return vop(VM_DOT, A_ZERO, V_TMP, VB, VR, VTMP, V_RHO_NEW, V_TMP); // rho_new = rhat.r
      5'd8:  return sop(SOP_DIV, V_RHO_NEW, V_RHO, V_TMP);
      5'd9:  return sop(SOP_DIV, V_ALPHA, V_OMEGA, V_BETA);
      5'd10: return sop(SOP_MUL, V_TMP, V_BETA, V_BETA);
      5'd11: return ctl(I_JFIRST, PC_FIRST);
      5'd12: return vop(VM_AXPY, A_NEG, V_OMEGA, VV, VP, VTMP, V_TMP, V_TMP);   // tmp = p - omega v
      5'd13: begin
        instr_t i;
        i = vop(VM_AXPY, A_VAR, V_BETA, VTMP, VR, VP, V_TMP, V_TMP);           // p = r + beta tmp
        i.target = PC_PRE;
        return i;
      end
      5'd14: return vop(VM_AXPY, A_ZERO, V_TMP, VR, VR, VP, V_TMP, V_TMP);     // p = r
      5'd15: return mat(MOP_ILU_FWD, M_L, 1'b1, 1'b0, VP, VY);
      5'd16: return mat(MOP_ILU_BWD, M_U, 1'b0, 1'b1, VP, VY);                 // y
      5'd17: return mat(MOP_SPMV,    M_A, 1'b0, 1'b0, VY, VV);                 // v = A y
      5'd18: return vop(VM_DOT, A_ZERO, V_TMP, VB, VV, VTMP, V_TMP, V_TMP);    // rhat.v
      5'd19: return sop(SOP_DIV, V_RHO_NEW, V_TMP, V_ALPHA);
      5'd20: return vop(VM_AXPY, A_VAR, V_ALPHA, VY, VX, VH, V_TMP, V_TMP);    // h = x + alpha y
      5'd21: return vop(VM_AXPY, A_NEG, V_ALPHA, VV, VR, VS, V_TMP, V_TMP);    // s = r - alpha v
      5'd22: return mat(MOP_ILU_FWD, M_L, 1'b1, 1'b0, VS, VZ);
      5'd23: return mat(MOP_ILU_BWD, M_U, 1'b0, 1'b1, VS, VZ);                 // z
      5'd24: return mat(MOP_SPMV,    M_A, 1'b0, 1'b0, VZ, VT);                 // t = A z
      5'd25: return vop(VM_DOT2, A_ZERO, V_TMP, VT, VS, VTMP, V_DOT0, V_DOT1); // t.s, t.t
      5'd26: return sop(SOP_DIV, V_DOT0, V_DOT1, V_OMEGA);
      5'd27: return vop(VM_AXPY, A_VAR, V_OMEGA, VZ, VH, VX, V_TMP, V_TMP);    // x = h + omega z
      5'd28: return vop(VM_AXPY_NORM, A_NEG, V_OMEGA, VT, VS, VR, V_TMP, V_NORM); // r, |r|^2
      5'd29: begin
        instr_t i;
        i = nop(); i.op = I_MOV; i.sa = V_RHO_NEW; i.sd = V_RHO;
        return i;
      end
      5'd30: return ctl(I_LOOP, PC_CHK);
      default: begin
        instr_t i;
        i = nop(); i.sa = V_NORM;     // I_END: norm = sqrt(|r|^2)
        return i;
      end
    endcase
  endfunction

  // ------------------------------------------------------------ state
  typedef enum logic [3:0] {
    T_IDLE, T_FETCH, T_VOP, T_VWB0, T_VWB1, T_FILL, T_MAT, T_DUMP, T_SOP, T_END
  } ts_e;
  ts_e              ts;
  logic [4:0]       pc;
  instr_t           ir;
  logic [31:0]      iter;
  logic [IDX_W-1:0] nlines;
  logic [LANES-1:0] last_mask;

  assign ir     = ucode(pc);
  assign nlines = (n + 7) >> 3;
  always_comb
    for (int k = 0; k < LANES; k++)
      last_mask[k] = (n[2:0] == 3'd0) || (3'(k) < n[2:0]);

  function automatic logic [ADDR_W-1:0] vaddr(vid_e v, logic [ADDR_W-1:0] vb0, logic [ADDR_W-1:0] vs);
    return vb0 + ADDR_W'(v) * vs;
  endfunction

  // ------------------------------------------------------------ scalars
  logic  vr_init, vr_we;
  var_e  vr_waddr, vr_ra, vr_rb;
  fp64_t vr_wdata, vr_a, vr_b;
  variable_registers u_vars (
    .clk, .rst_n, .init(vr_init), .we(vr_we), .waddr(vr_waddr), .wdata(vr_wdata),
    .raddr_a(vr_ra), .rdata_a(vr_a), .raddr_b(vr_rb), .rdata_b(vr_b)
  );

  logic  fs_start, fs_busy, fs_done;
  sop_e  fs_op;
  fp64_t fs_a, fs_b, fs_y;
  fp_scalar_ops u_fs (
    .clk, .rst_n, .start(fs_start), .op(fs_op), .a(fs_a), .b(fs_b),
    .busy(fs_busy), .done(fs_done), .y(fs_y)
  );

  // ------------------------------------------------------------ vector streams
  logic  mat_phase, fill_take, fd_lane_ok;
  logic  ra_start, rb_start, ra_ov, rb_ov, ra_or, rb_or, ra_busy, rb_busy;
  line_t ra_out, rb_out;
  logic [ADDR_W-1:0] ra_base, rb_base;
  logic  lr_a_req_valid, lr_a_rsp_valid;
  logic [ADDR_W-1:0] lr_a_req_addr;

  line_reader u_ra (
    .clk, .rst_n, .start(ra_start), .base(ra_base), .nlines,
    .req_valid(lr_a_req_valid), .req_ready(va_req_ready && !mat_phase), .req_addr(lr_a_req_addr),
    .rsp_valid(lr_a_rsp_valid), .rsp_data(va_rsp_data),
    .out_valid(ra_ov), .out_ready(ra_or), .out_data(ra_out), .busy(ra_busy)
  );
  line_reader u_rb (
    .clk, .rst_n, .start(rb_start), .base(rb_base), .nlines,
    .req_valid(vb_req_valid), .req_ready(vb_req_ready), .req_addr(vb_req_addr),
    .rsp_valid(vb_rsp_valid), .rsp_data(vb_rsp_data),
    .out_valid(rb_ov), .out_ready(rb_or), .out_data(rb_out), .busy(rb_busy)
  );

  // vector ops unit with an output FIFO for write backpressure
  localparam int OF_DEPTH = 16;
  logic  vo_start, vo_in_valid, vo_in_last, vo_out_valid, vo_out_last, vo_done;
  vline_t vo_out;
  logic [LANES-1:0] vo_out_mask, vo_mask;
  fp64_t vo_alpha, vo_d0, vo_d1;
  logic [IDX_W-1:0] in_cnt, out_cnt;
  logic [5:0] vo_inflight;
  logic [$clog2(OF_DEPTH):0] of_count;
  logic of_in_ready, of_valid, of_ready;
  logic [LANES*64+LANES-1:0] of_data;
  logic axpy_mode, vdone_q;

  assign axpy_mode   = ir.vm == VM_AXPY || ir.vm == VM_AXPY_NORM;
  assign vo_in_valid = ts == T_VOP && ra_ov && rb_ov && in_cnt < nlines
                       && (!axpy_mode || 32'(vo_inflight) + 32'(of_count) < OF_DEPTH - 1);
  assign vo_in_last  = in_cnt + 1 == nlines;
  assign vo_mask     = vo_in_last ? last_mask : '1;
  assign ra_or       = (ts == T_VOP) ? vo_in_valid : (ts == T_FILL && fill_take);
  assign rb_or       = vo_in_valid;

  vector_ops_unit #(.MUL_LAT(MUL_LAT), .ADD_LAT(ADD_LAT)) u_vou (
    .clk, .rst_n, .start(vo_start), .mode(ir.vm), .alpha(vo_alpha),
    .in_valid(vo_in_valid), .in_last(vo_in_last), .a(ra_out), .b(rb_out), .mask(vo_mask),
    .out_valid(vo_out_valid), .out_last(vo_out_last), .out_vals(vo_out), .out_mask(vo_out_mask),
    .d0(vo_d0), .d1(vo_d1), .done(vo_done)
  );

  sync_fifo #(.W(LANES*64 + LANES), .DEPTH(OF_DEPTH)) u_of (
    .clk, .rst_n, .clear(1'b0),
    .in_valid(vo_out_valid), .in_ready(of_in_ready), .in_data({vo_out, vo_out_mask}),
    .out_valid(of_valid), .out_ready(of_ready), .out_data(of_data), .count(of_count)
  );

  // ------------------------------------------------------------ matrix unit
  logic  mo_start, mo_busy, mo_done;
  logic  mo_wr_valid, mo_d_req_valid;
  logic [ADDR_W-1:0] mo_wr_addr, mo_d_req_addr, mo_meta;
  line_t mo_wr_data;
  logic [LANES-1:0] mo_wr_strb;
  logic [CAW:0] mo_nc;
  logic  u0_en, u1_en_m, u1_we_m;
  logic [UAW-1:0] u0_addr, u1_addr_m;
  fp64_t u0_rdata, u1_rdata, u1_wdata_m;
  logic [31:0] mo_colors;

  assign mat_phase = ts == T_MAT;
  always_comb begin
    case (ir.msel)
      M_L:     begin mo_meta = l_meta; mo_nc = l_ncolors; end
      M_U:     begin mo_meta = u_meta; mo_nc = u_ncolors; end
      default: begin mo_meta = a_meta; mo_nc = a_ncolors; end
    endcase
  end

  matrix_op_unit #(
    .MAX_COLORS(MAX_COLORS), .VPM_DEPTH(VPM_DEPTH), .WIN(WIN), .MUL_LAT(MUL_LAT), .UAW(UAW)
  ) u_mou (
    .clk, .rst_n, .start(mo_start), .mode(ir.mop), .meta_base(mo_meta), .ncolors(mo_nc),
    .n, .diag_base, .res_base(vaddr(ir.vd, vec_base, vec_stride)),
    .busy(mo_busy), .done(mo_done),
    .v_req_valid(mv_req_valid), .v_req_ready(mv_req_ready), .v_req_addr(mv_req_addr),
    .v_rsp_valid(mv_rsp_valid), .v_rsp_data(mv_rsp_data),
    .i_req_valid(mi_req_valid), .i_req_ready(mi_req_ready), .i_req_addr(mi_req_addr),
    .i_rsp_valid(mi_rsp_valid), .i_rsp_data(mi_rsp_data),
    .m_req_valid(mm_req_valid), .m_req_ready(mm_req_ready), .m_req_addr(mm_req_addr),
    .m_rsp_valid(mm_rsp_valid), .m_rsp_data(mm_rsp_data),
    .d_req_valid(mo_d_req_valid), .d_req_ready(va_req_ready && mat_phase),
    .d_req_addr(mo_d_req_addr), .d_rsp_valid(va_rsp_valid && mat_phase), .d_rsp_data(va_rsp_data),
    .wr_valid(mo_wr_valid), .wr_ready(vw_ready && mat_phase), .wr_addr(mo_wr_addr),
    .wr_data(mo_wr_data), .wr_strb(mo_wr_strb),
    .u0_en, .u0_addr, .u0_rdata,
    .u1_en(u1_en_m), .u1_we(u1_we_m), .u1_addr(u1_addr_m), .u1_wdata(u1_wdata_m), .u1_rdata,
    .stall_cycles, .overlap_cycles, .colors_done(mo_colors)
  );

  // ------------------------------------------------------------ on-chip vector memory
  logic  u1_en, u1_we;
  logic [UAW-1:0] u1_addr;
  fp64_t u1_wdata;
  uram_vector_memory #(.DEPTH(URAM_DEPTH)) u_uram (
    .clk,
    .en0(u0_en), .we0(1'b0), .addr0(u0_addr), .wdata0(FP64_ZERO), .rdata0(u0_rdata),
    .en1(u1_en), .we1(u1_we), .addr1(u1_addr), .wdata1(u1_wdata), .rdata1(u1_rdata)
  );

  // fill (off-chip vector -> on-chip memory) and dump (on-chip -> off-chip)
  logic [IDX_W-1:0] fd_elem;     // element index being moved
  logic [2:0]       fd_lane;
  logic             dump_rd_pend, dump_line_ready;
  logic [2:0]       dump_rd_lane;
  vline_t           dump_line;
  logic [IDX_W-1:0] dump_lines;
  assign fill_take = ts == T_FILL && ra_ov && (fd_lane == 3'd7 || fd_elem + 1 == n);

  always_comb begin
    u1_en    = u1_en_m;
    u1_we    = u1_we_m;
    u1_addr  = u1_addr_m;
    u1_wdata = u1_wdata_m;
    if (ts == T_FILL) begin
      u1_en    = ra_ov && fd_elem < n;
      u1_we    = 1'b1;
      u1_addr  = UAW'(fd_elem);
      u1_wdata = ra_out[64*fd_lane +: 64];
    end else if (ts == T_DUMP) begin
      u1_en    = !dump_line_ready && fd_elem < n && fd_lane_ok;
      u1_we    = 1'b0;
      u1_addr  = UAW'(fd_elem);
      u1_wdata = FP64_ZERO;
    end
  end
  assign fd_lane_ok = !(fd_lane == 3'd0 && dump_rd_pend);

  // ------------------------------------------------------------ port muxes
  assign va_req_valid = mat_phase ? mo_d_req_valid : lr_a_req_valid;
  assign va_req_addr  = mat_phase ? mo_d_req_addr  : lr_a_req_addr;
  assign lr_a_rsp_valid = va_rsp_valid && !mat_phase;

  logic [IDX_W-1:0] wline;   // line counter of vector-op and dump writes
  always_comb begin
    vw_valid = 1'b0;
    vw_addr  = vaddr(ir.vd, vec_base, vec_stride) + ADDR_W'(wline);
    vw_data  = of_data[LANES*64+LANES-1:LANES];
    vw_strb  = of_data[LANES-1:0];
    of_ready = 1'b0;
    if (mat_phase) begin
      vw_valid = mo_wr_valid;
      vw_addr  = mo_wr_addr;
      vw_data  = mo_wr_data;
      vw_strb  = mo_wr_strb;
    end else if (ts == T_DUMP) begin
      vw_valid = dump_line_ready;
      vw_data  = dump_line;
      vw_strb  = (wline + 1 == nlines) ? last_mask : '1;
    end else begin
      vw_valid = of_valid;
      of_ready = vw_ready;
    end
  end

  // ------------------------------------------------------------ sequencer
  logic cont;   // loop continues: |r|^2 > threshold and iterations left
  assign vr_ra = (ir.op == I_CHK) ? V_NORM : ir.sa;
  assign vr_rb = (ir.op == I_CHK) ? V_CONV : ir.sb;
  assign cont  = fp64_gt(vr_a, vr_b) && iter < max_iter;
  assign busy  = ts != T_IDLE;

  always_comb begin
    case (ir.asrc)
      A_VAR:   vo_alpha = vr_a;
      A_NEG:   vo_alpha = fp64_neg(vr_a);
      A_MONE:  vo_alpha = fp64_neg(FP64_ONE);
      default: vo_alpha = FP64_ZERO;
    endcase
  end

  always_comb begin
    ra_start = 1'b0;
    rb_start = 1'b0;
    ra_base  = vaddr(ir.va, vec_base, vec_stride);
    rb_base  = vaddr(ir.vb, vec_base, vec_stride);
    vo_start = 1'b0;
    mo_start = 1'b0;
    fs_start = 1'b0;
    fs_op    = ir.sop;
    fs_a     = vr_a;
    fs_b     = vr_b;
    vr_init  = 1'b0;
    vr_we    = 1'b0;
    vr_waddr = ir.sd;
    vr_wdata = fs_y;
    if (ts == T_FETCH) begin
      case (ir.op)
        I_INIT: begin
          vr_init = 1'b1;
        end
        I_VOP: begin
          ra_start = 1'b1;
          rb_start = 1'b1;
          vo_start = 1'b1;
        end
        I_MAT: begin
          if (ir.fill) ra_start = 1'b1;
          else         mo_start = 1'b1;
        end
        I_SOP: fs_start = 1'b1;
        I_MOV: begin
          vr_we    = 1'b1;
          vr_wdata = vr_a;
        end
        I_LDC: begin
          vr_we    = 1'b1;
          vr_waddr = V_CONV;
          vr_wdata = desired_improvement;
        end
        I_END: begin
          fs_start = 1'b1;
          fs_op    = SOP_SQRT;
        end
        default: ;
      endcase
    end
    if (ts == T_FILL && !ra_busy && fd_elem >= n) mo_start = 1'b1;
    if (ts == T_SOP && fs_done && ir.op == I_SOP) vr_we = 1'b1;
    if (ts == T_VWB0) begin
      vr_we    = ir.vm == VM_DOT || ir.vm == VM_DOT2;
      vr_waddr = ir.d0;
      vr_wdata = vo_d0;
    end
    if (ts == T_VWB1) begin
      vr_we    = ir.vm == VM_DOT2 || ir.vm == VM_AXPY_NORM;
      vr_waddr = ir.sd;
      vr_wdata = vo_d1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ts           <= T_IDLE;
      pc           <= '0;
      iter         <= '0;
      in_cnt       <= '0;
      out_cnt      <= '0;
      vo_inflight  <= '0;
      wline        <= '0;
      vdone_q      <= 1'b0;
      fd_elem      <= '0;
      fd_lane      <= '0;
      dump_rd_pend <= 1'b0;
      dump_rd_lane <= '0;
      dump_line    <= '0;
      dump_line_ready <= 1'b0;
      dump_lines   <= '0;
      done         <= 1'b0;
      converged    <= 1'b0;
      iterations   <= '0;
      norm         <= FP64_ZERO;
      spmv_passes  <= '0;
      ilu_passes   <= '0;
      vec_ops      <= '0;
      scalar_ops   <= '0;
    end else begin
      done <= 1'b0;
      vo_inflight <= vo_inflight + 6'(vo_in_valid && axpy_mode) - 6'(vo_out_valid);
      case (ts)
        T_IDLE: if (start) begin
          pc         <= '0;
          iter       <= '0;
          converged  <= 1'b0;
          spmv_passes <= '0;
          ilu_passes <= '0;
          vec_ops    <= '0;
          scalar_ops <= '0;
          ts         <= T_FETCH;
        end
        T_FETCH: begin
          pc <= pc + 1'b1;
          case (ir.op)
            I_INIT, I_LDC: ;
            I_VOP: begin
              pc      <= pc;
              in_cnt  <= '0;
              out_cnt <= '0;
              wline   <= '0;
              vdone_q <= 1'b0;
              vec_ops <= vec_ops + 1'b1;
              ts      <= T_VOP;
            end
            I_MAT: begin
              pc      <= pc;
              fd_elem <= '0;
              fd_lane <= '0;
              ts      <= ir.fill ? T_FILL : T_MAT;
            end
            I_SOP: begin
              pc         <= pc;
              scalar_ops <= scalar_ops + 1'b1;
              ts         <= T_SOP;
            end
            I_MOV: ;
            I_CHK: if (!cont) begin
              converged <= !fp64_gt(vr_a, vr_b);
              pc        <= ir.target;
            end
            I_JFIRST: if (iter == 0) pc <= ir.target;
            I_LOOP: begin
              iter <= iter + 1'b1;
              pc   <= ir.target;
            end
            default: begin   // I_END: square root of |r|^2
              pc <= pc;
              ts <= T_END;
            end
          endcase
        end
        T_VOP: begin
          if (vo_in_valid) in_cnt <= in_cnt + 1'b1;
          if (vw_valid && vw_ready) wline <= wline + 1'b1;
          if (vo_done) vdone_q <= 1'b1;
          if ((!axpy_mode || wline + IDX_W'(vw_valid && vw_ready) == nlines)
              && (ir.vm == VM_AXPY || vdone_q || vo_done))
            ts <= T_VWB0;
        end
        T_VWB0: ts <= T_VWB1;
        T_VWB1: begin
          ts <= T_FETCH;
          pc <= (ir.target != 0) ? ir.target : pc + 1'b1;
        end
        T_FILL: begin
          if (u1_en) begin
            fd_elem <= fd_elem + 1'b1;
            fd_lane <= fd_lane + 1'b1;
          end
          if (fill_take) fd_lane <= '0;
          if (mo_start) ts <= T_MAT;
        end
        T_MAT: if (mo_done) begin
          if (ir.mop == MOP_SPMV) spmv_passes <= spmv_passes + 1'b1;
          else                    ilu_passes  <= ilu_passes + 1'b1;
          fd_elem         <= '0;
          fd_lane         <= '0;
          wline           <= '0;
          dump_line_ready <= 1'b0;
          dump_rd_pend    <= 1'b0;
          if (ir.dump) ts <= T_DUMP;
          else begin
            pc <= pc + 1'b1;
            ts <= T_FETCH;
          end
        end
        T_DUMP: begin
          dump_rd_pend <= u1_en;
          dump_rd_lane <= fd_lane;
          if (u1_en) begin
            fd_elem <= fd_elem + 1'b1;
            fd_lane <= fd_lane + 1'b1;
          end
          if (dump_rd_pend) begin
            dump_line[dump_rd_lane] <= u1_rdata;
            if (dump_rd_lane == 3'd7 || fd_elem >= n) dump_line_ready <= 1'b1;
          end
          if (vw_valid && vw_ready) begin
            dump_line_ready <= 1'b0;
            dump_line       <= '0;
            wline           <= wline + 1'b1;
            if (wline + 1 == nlines) begin
              pc <= pc + 1'b1;
              ts <= T_FETCH;
            end
          end
        end
        T_SOP: if (fs_done) begin
          pc <= pc + 1'b1;
          ts <= T_FETCH;
        end
        T_END: if (fs_done) begin
          norm       <= fs_y;
          iterations <= iter;
          done       <= 1'b1;
          ts         <= T_IDLE;
        end
        default: ts <= T_IDLE;
      endcase
    end
  end
endmodule
