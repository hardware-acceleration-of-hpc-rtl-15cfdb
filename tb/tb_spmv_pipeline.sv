// tb_spmv_pipeline: streams random CSRO matrices (empty rows, rows spanning
// several lines, padded last lines, two colors) through the SpMV unit and
// compares every row result with a reference computed in the testbench.
// Values are small integers so all sums are exact whatever the adding order.
// A small write window forces input stalls; the testbench advances the
// window base only behind the delivered frontier, and checks that every row
// below a frontier has been delivered, exactly once, and the latency of the
// first result.
module tb_spmv_pipeline;
  import fp64_pkg::*;
  import solver_pkg::*;
  localparam int VPM_DEPTH = 256, WIN = 24, MUL_LAT = 2;
  localparam int LAT = 1 + MUL_LAT + 3 + 1 + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready;
  mat_line_t in_line;
  logic [IDX_W-1:0] color_row0 = 0, color_rows = 0, wr_base = 0;
  logic vpm_we = 0; logic [7:0] vpm_waddr = 0; fp64_t vpm_wdata = 0;
  logic [NOUT-1:0] res_valid; logic [NOUT-1:0][IDX_W-1:0] res_row; logic [NOUT-1:0][63:0] res_val;
  logic fr_valid, busy, stall; logic [IDX_W-1:0] frontier;

  spmv_pipeline #(.MUL_LAT(MUL_LAT), .VPM_DEPTH(VPM_DEPTH), .WIN(WIN)) dut (.*);

  int checks = 0, failures = 0, stalls = 0, cyc = 0;
  real xv [VPM_DEPTH];
  real yref [int];
  real got [int];
  int  ngot [int];
  int  t_first_in = -1, t_first_out = -1;

  logic [IDX_W-1:0] last_fr = 0;
  // the window base follows the frontier only every 8th cycle, which forces stalls
  always @(posedge clk) if (cyc % 8 == 0) wr_base <= last_fr;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (stall) stalls++;
    if (in_valid && in_ready && t_first_in < 0) t_first_in = cyc;
    for (int i = 0; i < NOUT; i++) if (rst_n && res_valid[i]) begin
      if (t_first_out < 0) t_first_out = cyc;
      got[int'(res_row[i])] = $bitstoreal(res_val[i]);
      ngot[int'(res_row[i])] = ngot.exists(int'(res_row[i])) ? ngot[int'(res_row[i])] + 1 : 1;
    end
    if (rst_n && fr_valid) begin
      // rows below the frontier must be complete (rows with no non-zero need no result)
      for (int r = int'(wr_base); r < int'(frontier); r++) begin
        if (yref.exists(r) && yref[r] != 0.0 && !ngot.exists(r)) begin
          failures++; $display("row %0d missing at frontier %0d", r, frontier);
        end
      end
      last_fr = frontier;
    end
  end

  task automatic run_color(int row0, int nrows);
    int len [];
    int nnzv [$]; int cols [$]; int offs [$];
    int prev, nl;
    len = new[nrows];
    for (int r = 0; r < nrows; r++) begin
      case ($urandom_range(0, 5))
        0: len[r] = 0;
        1: len[r] = $urandom_range(9, 30);
        default: len[r] = $urandom_range(1, 6);
      endcase
    end
    prev = row0 - 1;
    for (int r = 0; r < nrows; r++) begin
      real acc;
      acc = 0.0;
      for (int j = 0; j < len[r]; j++) begin
        int v, c;
        v = int'($urandom_range(0, 20)) - 10;
        c = $urandom_range(0, VPM_DEPTH - 1);
        if (v == 0) v = 1;
        nnzv.push_back(v); cols.push_back(c);
        offs.push_back(j == 0 ? (row0 + r - prev) : 0);
        acc += real'(v) * xv[c];
      end
      if (len[r] > 0) prev = row0 + r;
      yref[row0 + r] = acc;
    end
    color_row0 = row0; color_rows = nrows;
    nl = (nnzv.size() + LANES - 1) / LANES;
    if (nl == 0) nl = 1;
    for (int l = 0; l < nl; l++) begin
      @(negedge clk);
      in_valid = 1;
      in_line = '0;
      in_line.first = (l == 0);
      in_line.last  = (l == nl - 1);
      for (int k = 0; k < LANES; k++) begin
        int i;
        i = l * LANES + k;
        if (i < nnzv.size()) begin
          in_line.mask[k] = 1'b1;
          in_line.vals[k] = $realtobits(real'(nnzv[i]));
          in_line.cols[k] = cols[i];
          in_line.offs[k] = offs[i];
        end else begin
          in_line.vals[k] = FP64_QNAN;  // padding must not leak into sums
        end
      end
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk) in_valid = 0;
    while (busy) @(posedge clk);
    repeat (2) @(posedge clk);
  endtask

  initial begin
    in_line = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < VPM_DEPTH; i++) begin
      @(negedge clk);
      xv[i] = real'(int'($urandom_range(0, 16)) - 8);
      vpm_we = 1; vpm_waddr = 8'(i); vpm_wdata = $realtobits(xv[i]);
    end
    @(negedge clk) vpm_we = 0;
    run_color(0, 60);
    run_color(60, 5);
    run_color(65, 40);
    foreach (yref[r]) begin
      real g;
      g = got.exists(r) ? got[r] : 0.0;
      checks++;
      if (g != yref[r] || (ngot.exists(r) && ngot[r] != 1)) begin
        failures++;
        if (failures < 10) $display("row %0d got %f exp %f n=%0d", r, g, yref[r], ngot.exists(r) ? ngot[r] : 0);
      end
    end
    checks++;
    if (t_first_out - t_first_in < LAT) begin failures++; $display("latency %0d", t_first_out - t_first_in); end
    checks++;
    if (stalls == 0) begin failures++; $display("no stall seen"); end
    $display("stall cycles %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
