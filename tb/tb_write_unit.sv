// tb_write_unit: results for rows of a range arrive in random order and
// random port positions, some rows get none (empty rows, which must read
// as 0), and the frontier advances in steps. The producer obeys the window
// rule (never a row at or beyond base + WIN). Output lines, taken with a
// random ready, are checked for alignment, lane mask, values and order;
// done must rise after the last line. Three ranges with unaligned bounds.
module tb_write_unit;
  import fp64_pkg::*;
  import solver_pkg::*;
  localparam int WIN = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, fr_valid, out_valid, out_ready, done;
  logic [IDX_W-1:0] row_lo, end_row, frontier, out_row, base;
  logic [NOUT-1:0] res_valid;
  logic [NOUT-1:0][IDX_W-1:0] res_row;
  logic [NOUT-1:0][63:0] res_val;
  vline_t out_vals;
  logic [LANES-1:0] out_mask;
  write_unit #(.WIN(WIN)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  fp64_t expv [256];
  logic [IDX_W-1:0] next_line;
  int lines = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    check(out_row == next_line, "line order");
    for (int k = 0; k < LANES; k++) begin
      int r;
      r = int'(out_row) + k;
      check(out_mask[k] == (r >= int'(row_lo) && r < int'(end_row)), "mask");
      if (out_mask[k]) check(out_vals[k] == expv[r], "value");
    end
    next_line <= next_line + 8;
    lines++;
  end
  always @(posedge clk) out_ready <= ($urandom % 3) != 0;

  initial begin
    start = 0; fr_valid = 0; frontier = 0; res_valid = '0; res_row = '0; res_val = '0;
    row_lo = 0; end_row = 0; next_line = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      int lo, hi, f;
      lo = (t == 0) ? 0 : 3 + int'($urandom % 20);
      hi = lo + 20 + int'($urandom % 60);
      @(posedge clk); #1;
      row_lo = lo; end_row = hi; start = 1;
      next_line = IDX_W'(lo & ~7);
      @(posedge clk); #1;
      start = 0;
      f = lo;
      $display("range %0d %0d", lo, hi);
      while (f < hi) begin
        int step, rows [$], np;
        rows.delete();
        step = 1 + int'($urandom % 9);
        if (f + step > hi) step = hi - f;
        while (f + step > int'(base) + WIN) begin @(posedge clk); #1; end
        for (int r = f; r < f + step; r++) begin
          if (($urandom % 5) != 0) begin
            expv[r] = {$urandom, $urandom};
            rows.push_back(r);
          end else expv[r] = FP64_ZERO;
        end
        rows.shuffle();
        res_valid = '0;
        np = 0;
        foreach (rows[i]) begin
          int p;
          p = int'($urandom % NOUT);
          while (res_valid[p]) p = (p + 1) % NOUT;
          res_valid[p] = 1'b1;
          res_row[p] = IDX_W'(rows[i]);
          res_val[p] = expv[rows[i]];
        end
        fr_valid = 1;
        frontier = IDX_W'(f + step);
        @(posedge clk); #1;
        res_valid = '0;
        fr_valid = 0;
        f += step;
      end
      while (!done) @(posedge clk);
      #1;
      check(next_line >= IDX_W'(hi), "all lines out");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
