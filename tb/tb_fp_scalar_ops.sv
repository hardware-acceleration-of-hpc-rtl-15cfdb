// tb_fp_scalar_ops: random multiplications, divisions and square roots,
// compared bit for bit with the simulator's double arithmetic, plus the
// special cases x/0, 0/x, sqrt(-x); checks the documented latencies.
module tb_fp_scalar_ops;
  import fp64_pkg::*;
  import solver_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done; sop_e op = SOP_MUL; fp64_t a = 0, b = 0, y;
  fp_scalar_ops dut (.clk, .rst_n, .start, .op, .a, .b, .busy, .done, .y);
  int checks = 0, failures = 0;

  function automatic fp64_t rnd();
    logic [51:0] f = {$urandom, $urandom};
    int e = 1023 + int'($urandom_range(0, 80)) - 40;
    return {1'($urandom), 11'(e), f};
  endfunction

  task automatic run(sop_e o, fp64_t x, fp64_t z, fp64_t exp, int lat);
    int n = 0;
    @(negedge clk); op = o; a = x; b = z; start = 1;
    @(negedge clk); start = 0;
    n = 1;
    while (!done) begin @(negedge clk); n++; end
    checks++;
    if (y !== exp || n != lat) begin
      failures++;
      if (failures < 10) $display("FAIL op=%0d %h %h -> %h exp %h lat %0d", o, x, z, y, exp, n);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      fp64_t x, z;
      x = rnd(); z = rnd();
      run(SOP_MUL, x, z, $realtobits($bitstoreal(x) * $bitstoreal(z)), 1);
      run(SOP_DIV, x, z, $realtobits($bitstoreal(x) / $bitstoreal(z)), 57);
      x[63] = 1'b0;
      run(SOP_SQRT, x, z, $realtobits($sqrt($bitstoreal(x))), 57);
    end
    run(SOP_DIV, FP64_ONE, FP64_ZERO, FP64_PINF, 3);   // special operands finish early
    run(SOP_DIV, FP64_ZERO, FP64_ONE, FP64_ZERO, 3);
    run(SOP_SQRT, fp64_neg(FP64_ONE), FP64_ZERO, FP64_QNAN, 3);
    run(SOP_SQRT, 64'h4010_0000_0000_0000, FP64_ZERO, 64'h4000_0000_0000_0000, 57);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
