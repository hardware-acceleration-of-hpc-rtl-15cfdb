// tb_dot_axpy: checks both modes of the eight-lane vector unit.
// axpy: random integer-valued lines (exact in double), y compared lane by
// lane with alpha*a + b, latency checked to be MUL_LAT + ADD_LAT. dot:
// streams of random length (1..40 lines, gaps between lines, last-line
// masks) compared with the exact integer dot product; the hold-register
// path of the final accumulator must be used.
module tb_dot_axpy;
  import fp64_pkg::*;
  import solver_pkg::*;
  localparam int ML = 2, AL = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  vop_e mode;
  fp64_t alpha;
  logic start, in_valid, in_last, out_valid, dot_valid, busy;
  vline_t a, b, out_vals;
  logic [LANES-1:0] mask, out_mask;
  fp64_t dot_result;

  dot_axpy #(.MUL_LAT(ML), .ADD_LAT(AL)) dut (.*);

  function automatic fp64_t ri(int lo, int hi);
    return $realtobits(real'(lo + int'($urandom % (hi - lo + 1))));
  endfunction
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // axpy scoreboard
  vline_t exp_q [$];
  longint t_q [$];
  always @(posedge clk) if (rst_n && out_valid) begin
    vline_t e;
    longint t;
    e = exp_q.pop_front();
    t = t_q.pop_front();
    for (int k = 0; k < LANES; k++)
      check($bitstoreal(out_vals[k]) == $bitstoreal(e[k]), "axpy value");   // +0 == -0
    check(cyc - t == ML + AL, "axpy latency");
  end
  int holds = 0;
  always @(posedge clk) if (rst_n && dut.a7v && dut.h_v && !(dut.t_v && dut.y_v)) holds++;

  initial begin
    start = 0; in_valid = 0; in_last = 0; mode = VOP_AXPY; alpha = '0; a = '0; b = '0; mask = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // axpy
    for (int i = 0; i < 300; i++) begin
      vline_t e;
      alpha = ri(-8, 8);
      for (int k = 0; k < LANES; k++) begin
        a[k] = ri(-1000, 1000);
        b[k] = ri(-1000, 1000);
        e[k] = $realtobits($bitstoreal(alpha) * $bitstoreal(a[k]) + $bitstoreal(b[k]));
      end
      mask = '1;
      in_valid = ($urandom % 4) != 0;
      if (in_valid) begin exp_q.push_back(e); t_q.push_back(cyc); end
      @(posedge clk);
    end
    in_valid = 0;
    repeat (10) @(posedge clk);
    check(exp_q.size() == 0, "all axpy results out");
    // dot
    mode = VOP_DOT;
    for (int s = 0; s < 40; s++) begin
      int len;
      real ref_v;
      len = 1 + int'($urandom % 40);
      ref_v = 0.0;
      @(posedge clk);
      start = 1;
      @(posedge clk);
      start = 0;
      for (int l = 0; l < len; l++) begin
        while (($urandom % 3) == 0) begin in_valid = 0; @(posedge clk); end
        mask = (l == len - 1) ? 8'((1 << (1 + $urandom % 8)) - 1) : 8'hFF;
        for (int k = 0; k < LANES; k++) begin
          a[k] = ri(-100, 100);
          b[k] = ri(-100, 100);
          if (mask[k]) ref_v += $bitstoreal(a[k]) * $bitstoreal(b[k]);
        end
        in_valid = 1;
        in_last = (l == len - 1);
        @(posedge clk);
      end
      in_valid = 0;
      in_last = 0;
      while (!dot_valid) @(posedge clk);
      check($bitstoreal(dot_result) == ref_v, $sformatf("dot stream %0d", s));
    end
    check(holds > 0, "hold register used");
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
