// tb_reduce_unit: feeds random per-line segment summaries (continued
// heads, open tails, single-segment lines, color ends) and checks each row
// result the unit emits against a reference accumulator kept in the
// testbench, including that every opened row is closed exactly once.
module tb_reduce_unit;
  import fp64_pkg::*;
  import solver_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, empty = 0, cont = 0, head_is_tail = 0, tail_open = 0;
  fp64_t head_sum = 0, tail_sum = 0; logic [IDX_W-1:0] tail_row = 0;
  logic out_valid, open; logic [IDX_W-1:0] out_row; fp64_t out_val;
  reduce_unit dut (.*);
  int checks = 0, failures = 0, emitted = 0, expected = 0;
  real exp_val [$]; int exp_row [$];
  real racc; int rrow; bit ropen;

  always @(posedge clk) if (rst_n && out_valid) begin
    real e; int r;
    checks++;
    emitted++;
    if (exp_val.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = exp_val.pop_front(); r = exp_row.pop_front();
      if ($bitstoreal(out_val) != e || int'(out_row) != r) begin
        failures++; if (failures < 10) $display("FAIL row %0d/%0d val %f/%f", out_row, r, $bitstoreal(out_val), e);
      end
    end
  end

  initial begin
    int row;
    row = 0; ropen = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      real h, t;
      @(negedge clk);
      in_valid = 1; empty = 0;
      cont = ropen && ($urandom_range(0, 1) == 1);
      head_is_tail = ($urandom_range(0, 3) == 0);
      tail_open = ($urandom_range(0, 4) != 0);
      h = real'($urandom_range(0, 50)); t = real'($urandom_range(0, 50));
      if (head_is_tail) h = t;
      head_sum = $realtobits(h); tail_sum = $realtobits(t);
      if (!cont) row = row + 1 + (head_is_tail ? 0 : 2);
      else if (!head_is_tail) row = row + 2;
      tail_row = row;
      // reference
      if (cont) begin
        if (head_is_tail) begin
          racc += t;
          if (!tail_open) begin exp_val.push_back(racc); exp_row.push_back(rrow); ropen = 0; end
        end else begin
          exp_val.push_back(racc + h); exp_row.push_back(rrow);
          racc = t; rrow = row; ropen = tail_open;
        end
      end else begin
        if (ropen) begin exp_val.push_back(racc); exp_row.push_back(rrow); end
        racc = t; rrow = row; ropen = tail_open;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (exp_val.size() != 0 || emitted < 100) begin failures++; $display("left %0d emitted %0d", exp_val.size(), emitted); end
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
