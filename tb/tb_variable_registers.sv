// tb_variable_registers: checks reset values, writes and reads on both
// ports against a reference array, and the init reload.
module tb_variable_registers;
  import fp64_pkg::*;
  import solver_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic init = 0, we = 0; var_e waddr = V_ALPHA, ra = V_ALPHA, rb = V_ALPHA;
  fp64_t wdata = 0, da, db;
  variable_registers dut (.clk, .rst_n, .init, .we, .waddr, .wdata,
                          .raddr_a(ra), .rdata_a(da), .raddr_b(rb), .rdata_b(db));
  int checks = 0, failures = 0;
  fp64_t ref_r [NUM_VARS];

  task automatic check_all();
    for (int i = 0; i < NUM_VARS; i++) begin
      ra = var_e'(i); rb = var_e'(NUM_VARS - 1 - i); #1;
      checks += 2;
      if (da !== ref_r[i]) begin failures++; $display("FAIL a %0d %h %h", i, da, ref_r[i]); end
      if (db !== ref_r[NUM_VARS-1-i]) begin failures++; $display("FAIL b %0d", i); end
    end
  endtask

  task automatic reset_ref();
    for (int i = 0; i < NUM_VARS; i++) ref_r[i] = FP64_ZERO;
    ref_r[V_ALPHA] = FP64_ONE; ref_r[V_OMEGA] = FP64_ONE; ref_r[V_RHO] = FP64_ONE;
  endtask

  initial begin
    reset_ref();
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); check_all();
    for (int k = 0; k < 50; k++) begin
      int i = $urandom_range(0, NUM_VARS - 1);
      fp64_t v = {$urandom, $urandom};
      @(negedge clk); we = 1; waddr = var_e'(i); wdata = v;
      @(negedge clk); we = 0; ref_r[i] = v;
      check_all();
    end
    @(negedge clk); init = 1; @(negedge clk); init = 0; reset_ref(); check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
