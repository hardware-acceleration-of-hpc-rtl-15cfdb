// tb_spmv_control_unit: random CSRO lines (offsets 0..3, random padding)
// decoded by the control unit and by an independent model in the
// testbench; compares row numbers, segment heads, direct-to-merge lanes,
// the reduce controls and the frontier. Also decodes the example line of
// the CSRO figure (offsets 1 0 1 0 0 1 2 0 -> rows 0 0 1 1 1 2 4 4).
module tb_spmv_control_unit;
  import solver_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic accept = 0, first = 0, last = 0;
  iline_t offs = '0; logic [LANES-1:0] mask = '0;
  logic [IDX_W-1:0] color_row0 = 0, color_rows = 0;
  iline_t row; logic [LANES-1:0] seg_head, seg_end, direct;
  logic cont, head_is_tail, tail_open, empty; logic [2:0] head_lane; logic [IDX_W-1:0] frontier;
  spmv_control_unit dut (.*);
  int checks = 0, failures = 0;
  int cur;

  task automatic chk(string what, logic [63:0] g, logic [63:0] e);
    checks++;
    if (g !== e) begin failures++; if (failures < 10) $display("FAIL %s got %0h exp %0h", what, g, e); end
  endtask

  task automatic line(logic f, logic l);
    int o [LANES]; int r [LANES]; int b; logic [LANES-1:0] eh, ee, ed; int hl; logic ec;
    @(negedge clk);
    first = f; last = l;
    b = f ? int'(color_row0) - 1 : cur;
    for (int k = 0; k < LANES; k++) begin
      o[k] = mask[k] ? int'(offs[k]) : 0;
      b += o[k];
      r[k] = b;
    end
    for (int k = 0; k < LANES; k++) begin
      eh[k] = (k == 0) || o[k] != 0;
      ee[k] = (k == LANES-1) || o[k+1 < LANES ? k+1 : k] != 0;
    end
    hl = 0; while (!ee[hl]) hl++;
    ec = !f && o[0] == 0;
    for (int k = 0; k < LANES; k++) ed[k] = ee[k] && mask != 0 && !(ec && k <= hl) && (k != LANES-1 || l);
    #1;
    for (int k = 0; k < LANES; k++) chk("row", 64'(row[k]), 64'(r[k]));
    chk("head", 64'(seg_head), 64'(eh));
    chk("direct", 64'(direct), 64'(ed));
    chk("cont", 64'(cont), 64'(ec));
    chk("head_lane", 64'(head_lane), 64'(hl));
    chk("frontier", 64'(frontier), l ? 64'(color_row0 + color_rows) : 64'(r[LANES-1]));
    accept = 1;
    @(negedge clk) accept = 0;
    cur = r[LANES-1];
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // example line of the CSRO figure
    color_row0 = 0; color_rows = 5; mask = '1;
    offs = {32'd0, 32'd2, 32'd1, 32'd0, 32'd0, 32'd1, 32'd0, 32'd1};
    line(1, 1);
    chk("fig row6", 64'(row[6]), 64'd4);
    chk("fig row2", 64'(row[2]), 64'd1);
    for (int c = 0; c < 40; c++) begin
      int nl;
      nl = $urandom_range(1, 5);
      color_row0 = cur + 1 + $urandom_range(0, 3); color_rows = 60;
      for (int l = 0; l < nl; l++) begin
        for (int k = 0; k < LANES; k++) offs[k] = $urandom_range(0, 3);
        if (l == 0) offs[0] = $urandom_range(1, 2);
        mask = (l == nl - 1) ? LANES'((1 << $urandom_range(1, LANES)) - 1) : '1;
        line(l == 0, l == nl - 1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
