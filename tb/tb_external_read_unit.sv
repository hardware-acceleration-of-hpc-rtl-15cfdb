// tb_external_read_unit: three behavioural memory ports (random ready,
// in-order responses after random delays) hold a size table, partition
// index lines and value/index lines for a set of random colors, including
// a color without non-zeros. The test loads the table, then streams each
// color's partition indices and matrix lines with a random consumer ready,
// and checks every index, every value/column/offset lane, the lane masks
// and the first/last flags.
module tb_external_read_unit;
  import fp64_pkg::*;
  import solver_pkg::*;
  localparam int MC = 16, CAW = 4, ML = 512;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start_sizes, start_part, start_mat, sizes_busy, part_busy, mat_busy;
  logic [ADDR_W-1:0] meta_base;
  logic [CAW:0] ncolors;
  logic [CAW-1:0] part_color, mat_color;
  color_size_t part_sz, mat_sz;
  logic idx_valid, idx_ready, mat_valid, mat_ready;
  logic [IDX_W-1:0] idx;
  mat_line_t mat;
  logic v_req_valid, v_req_ready, v_rsp_valid, i_req_valid, i_req_ready, i_rsp_valid;
  logic m_req_valid, m_req_ready, m_rsp_valid;
  logic [ADDR_W-1:0] v_req_addr, i_req_addr, m_req_addr;
  line_t v_rsp_data, i_rsp_data, m_rsp_data;
  external_read_unit #(.MAX_COLORS(MC)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  line_t vmem [ML], imem [ML], mmem [ML];
  typedef struct { logic [ADDR_W-1:0] a; longint due; } rq_t;
  rq_t q [3][$];
  longint cyc = 0, last [3];
  logic [2:0] rv, rr;
  logic [2:0][ADDR_W-1:0] ra;
  assign rv = {m_req_valid, i_req_valid, v_req_valid};
  assign ra = {m_req_addr, i_req_addr, v_req_addr};
  assign {m_req_ready, i_req_ready, v_req_ready} = rr;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) begin
      rr <= '0; v_rsp_valid <= 0; i_rsp_valid <= 0; m_rsp_valid <= 0;
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
          od[p] = (p == 0) ? vmem[q[p][0].a] : (p == 1) ? imem[q[p][0].a] : mmem[q[p][0].a];
          void'(q[p].pop_front());
        end
      end
      {m_rsp_valid, i_rsp_valid, v_rsp_valid} <= ov;
      v_rsp_data <= od[0]; i_rsp_data <= od[1]; m_rsp_data <= od[2];
      rr <= 3'($urandom);
    end
  end
  always @(posedge clk) begin
    idx_ready <= ($urandom % 3) != 0;
    mat_ready <= ($urandom % 3) != 0;
  end

  int nnz_c [MC], npart_c [MC], pl_c [MC], ml_c [MC];
  initial begin
    int nc, mm, mx;
    start_sizes = 0; start_part = 0; start_mat = 0; meta_base = 0; ncolors = 0;
    part_color = 0; mat_color = 0;
    for (int i = 0; i < ML; i++) begin vmem[i] = {16{$urandom}}; imem[i] = {16{$urandom}}; mmem[i] = '0; end
    nc = 10;
    mm = 100;
    mx = 0;
    for (int c = 0; c < nc; c++) begin
      line_t sl;
      nnz_c[c] = (c == 3) ? 0 : 1 + int'($urandom % 40);
      npart_c[c] = 1 + int'($urandom % 40);
      pl_c[c] = mm;
      ml_c[c] = mx;
      for (int i = 0; i < npart_c[c]; i++) mmem[mm + i / 16][32 * (i % 16) +: 32] = $urandom;
      mm += (npart_c[c] + 15) / 16;
      mx += (nnz_c[c] + 7) / 8;
      sl = '0;
      sl[31:0] = 32'(c * 10);
      sl[63:32] = 32'(5 + c);
      sl[95:64] = 32'(nnz_c[c]);
      sl[127:96] = 32'(npart_c[c]);
      sl[159:128] = 32'(ml_c[c]);
      sl[191:160] = 32'(pl_c[c]);
      mmem[20 + c] = sl;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    meta_base = 20; ncolors = 5'(nc); start_sizes = 1;
    @(posedge clk); #1;
    start_sizes = 0;
    while (sizes_busy) begin @(posedge clk); #1; end
    for (int c = 0; c < nc; c++) begin
      int got, lines;
      part_color = CAW'(c);
      mat_color = CAW'(c);
      #1;
      check(part_sz.npart == 32'(npart_c[c]) && mat_sz.nnz == 32'(nnz_c[c]) && mat_sz.row0 == 32'(c * 10), "size table");
      start_part = 1;
      @(posedge clk); #1;
      start_part = 0;
      got = 0;
      while (got < npart_c[c]) begin
        @(posedge clk);
        if (idx_valid && idx_ready) begin
          check(idx == mmem[pl_c[c] + got / 16][32 * (got % 16) +: 32], "partition index");
          got++;
        end
        #1;
      end
      check(!part_busy, "partition stream ends");
      start_mat = 1;
      @(posedge clk); #1;
      start_mat = 0;
      lines = (nnz_c[c] == 0) ? 1 : (nnz_c[c] + 7) / 8;
      got = 0;
      while (got < lines) begin
        @(posedge clk);
        if (mat_valid && mat_ready) begin
          for (int k = 0; k < 8; k++) begin
            check(mat.mask[k] == (got * 8 + k < nnz_c[c]), "mask");
            if (mat.mask[k]) begin
              check(mat.vals[k] == vmem[ml_c[c] + got][64 * k +: 64], "value");
              check(mat.cols[k] == imem[ml_c[c] + got][32 * k +: 32], "column");
              check(mat.offs[k] == imem[ml_c[c] + got][256 + 32 * k +: 32], "offset");
            end
          end
          check(mat.first == (got == 0) && mat.last == (got == lines - 1), "first/last");
          got++;
        end
        #1;
      end
      check(!mat_busy, "matrix stream ends");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
