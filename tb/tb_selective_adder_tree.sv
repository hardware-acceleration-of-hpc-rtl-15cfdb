// tb_selective_adder_tree: random integer-valued products with random
// segment heads, one line per cycle; at every segment end the tree output
// must equal the segment's sum (computed in the testbench), exactly
// log2(8) = 3 cycles after the line entered.
module tb_selective_adder_tree;
  import fp64_pkg::*;
  import solver_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid; vline_t in_val = '0, out_sum; logic [LANES-1:0] in_head = '0;
  selective_adder_tree dut (.*);
  int checks = 0, failures = 0, cyc = 0;
  vline_t qv[$]; logic [LANES-1:0] qh[$]; int qt[$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      vline_t v; logic [LANES-1:0] h; int t; real s;
      v = qv.pop_front(); h = qh.pop_front(); t = qt.pop_front();
      s = 0.0;
      for (int k = 0; k < LANES; k++) begin
        if (h[k] || k == 0) s = 0.0;
        s += $bitstoreal(v[k]);
        if (k == LANES-1 || h[k+1 < LANES ? k+1 : k]) begin
          checks++;
          if ($bitstoreal(out_sum[k]) != s || cyc - t != 3) begin
            failures++;
            if (failures < 10) $display("FAIL lane %0d got %f exp %f lat %0d", k, $bitstoreal(out_sum[k]), s, cyc - t);
          end
        end
      end
    end
  end
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      for (int k = 0; k < LANES; k++) in_val[k] = $realtobits(real'(int'($urandom_range(0, 200)) - 100));
      in_head = LANES'($urandom);
      in_head[0] = 1'b1;
      if (in_valid) begin qv.push_back(in_val); qh.push_back(in_head); qt.push_back(cyc); end
    end
    @(negedge clk) in_valid = 0;
    repeat (6) @(posedge clk);
    checks++;
    if (qv.size() != 0) failures++;
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
