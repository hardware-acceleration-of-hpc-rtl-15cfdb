// tb_merge_unit: random valid patterns on the 8 adder-tree lanes and the
// reduce input; the outputs one cycle later must hold exactly the valid
// inputs, packed onto the lowest ports in lane order, reduce result last.
module tb_merge_unit;
  import fp64_pkg::*;
  import solver_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [LANES-1:0] lane_valid = '0; iline_t lane_row = '0; vline_t lane_val = '0;
  logic red_valid = 0; logic [IDX_W-1:0] red_row = 0; fp64_t red_val = 0;
  logic [NOUT-1:0] out_valid; logic [NOUT-1:0][IDX_W-1:0] out_row; logic [NOUT-1:0][63:0] out_val;
  merge_unit dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      int n; int er [NOUT]; logic [63:0] ev [NOUT];
      @(negedge clk);
      lane_valid = LANES'($urandom); red_valid = 1'($urandom);
      for (int k = 0; k < LANES; k++) begin lane_row[k] = $urandom; lane_val[k] = {$urandom, $urandom}; end
      red_row = $urandom; red_val = {$urandom, $urandom};
      n = 0;
      for (int k = 0; k < LANES; k++) if (lane_valid[k]) begin er[n] = lane_row[k]; ev[n] = lane_val[k]; n++; end
      if (red_valid) begin er[n] = red_row; ev[n] = red_val; n++; end
      @(negedge clk);
      for (int p = 0; p < NOUT; p++) begin
        checks++;
        if (out_valid[p] !== (p < n) || (p < n && (out_row[p] !== er[p] || out_val[p] !== ev[p]))) begin
          failures++; if (failures < 10) $display("FAIL port %0d", p);
        end
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
