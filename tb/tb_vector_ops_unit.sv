// tb_vector_ops_unit: runs each of the four modes on random integer-valued
// vectors (exact in double) of random length and checks the axpy output
// lines, the two dot results and the done pulse. For VM_AXPY_NORM the norm
// must be that of the axpy output, for VM_DOT2 d1 must be a.a.
module tb_vector_ops_unit;
  import fp64_pkg::*;
  import solver_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, in_valid, in_last, out_valid, out_last, done;
  vmode_e mode;
  fp64_t alpha, d0, d1;
  vline_t a, b, out_vals;
  logic [LANES-1:0] mask, out_mask;
  vector_ops_unit dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  function automatic fp64_t ri(int lo, int hi);
    return $realtobits(real'(lo + int'($urandom % (hi - lo + 1))));
  endfunction

  vline_t exp_q [$];
  int outs = 0, dones = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      vline_t e;
      e = exp_q.pop_front();
      for (int k = 0; k < LANES; k++)
        if (out_mask[k]) check($bitstoreal(out_vals[k]) == $bitstoreal(e[k]), "axpy lane");
      outs++;
    end
    if (done) dones++;
  end

  initial begin
    start = 0; in_valid = 0; in_last = 0; mode = VM_AXPY; alpha = '0; a = '0; b = '0; mask = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int len;
      real rd0, rd1, al;
      mode = vmode_e'(t % 4);
      len = 1 + int'($urandom % 20);
      alpha = ri(-5, 5);
      al = $bitstoreal(alpha);
      rd0 = 0.0;
      rd1 = 0.0;
      dones = 0;
      @(posedge clk);
      start = 1;
      @(posedge clk);
      start = 0;
      for (int l = 0; l < len; l++) begin
        vline_t e;
        mask = (l == len - 1) ? 8'((1 << (1 + $urandom % 8)) - 1) : 8'hFF;
        for (int k = 0; k < LANES; k++) begin
          real av, bv, yv;
          a[k] = ri(-50, 50);
          b[k] = ri(-50, 50);
          av = $bitstoreal(a[k]);
          bv = $bitstoreal(b[k]);
          yv = al * av + bv;
          e[k] = $realtobits(yv);
          if (mask[k]) begin
            rd0 += av * bv;
            rd1 += (mode == VM_AXPY_NORM) ? yv * yv : av * av;
          end
        end
        if (mode == VM_AXPY || mode == VM_AXPY_NORM) exp_q.push_back(e);
        in_valid = 1;
        in_last = l == len - 1;
        @(posedge clk);
        in_valid = 0;
        in_last = 0;
        repeat ($urandom % 2) @(posedge clk);
      end
      repeat (60) @(posedge clk);
      check(dones == 1, "one done per pass");
      check(exp_q.size() == 0, "all axpy lines out");
      if (mode == VM_DOT || mode == VM_DOT2) check($bitstoreal(d0) == rd0, "d0");
      if (mode == VM_DOT2 || mode == VM_AXPY_NORM) check($bitstoreal(d1) == rd1, "d1");
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
