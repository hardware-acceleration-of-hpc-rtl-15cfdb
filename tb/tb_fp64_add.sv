// tb_fp64_add: random and directed operands through the pipelined adder,
// compared bit for bit with the simulator's own double arithmetic; also
// checks that the result appears exactly LAT cycles after the operands.
module tb_fp64_add;
  import fp64_pkg::*;
  localparam int LAT = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid; fp64_t a, b, y; logic out_valid;
  fp64_add #(.LAT(LAT)) dut (.clk, .rst_n, .in_valid, .a, .b, .out_valid, .y);
  int checks = 0, failures = 0;
  fp64_t qa[$], qb[$];
  int    qt[$];
  int    cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic fp64_t rnd();
    logic [51:0] f = {$urandom, $urandom};
    int e = 1023 + int'($urandom_range(0, 60)) - 30;
    return {1'($urandom), 11'(e), f};
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    fp64_t ea, eb, exp; int t;
    ea = qa.pop_front(); eb = qb.pop_front(); t = qt.pop_front();
    exp = $realtobits($bitstoreal(ea) + $bitstoreal(eb));
    if (fp64_is_zero(exp)) exp = {exp[63], 63'd0};
    checks++;
    if (y !== exp || cyc - t != LAT) begin
      failures++;
      if (failures < 10) $display("ADD FAIL %h + %h = %h exp %h lat %0d", ea, eb, y, exp, cyc - t);
    end
  end

  initial begin
    in_valid = 0; a = 0; b = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid = 1;
      a = rnd(); b = rnd();
      if (i % 7 == 0) b = fp64_neg(a) ^ 64'(($urandom & 3));    // cancellation
      if (i % 11 == 0) b = {~a[63], a[62:52] - 11'd1, 52'($urandom)};
      if (i == 5) b = fp64_neg(a);                               // exact zero
      qa.push_back(a); qb.push_back(b); qt.push_back(cyc);
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    if (qa.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
