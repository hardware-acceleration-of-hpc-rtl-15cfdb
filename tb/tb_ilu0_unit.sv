// tb_ilu0_unit: feeds lines of sums with random masks in forward and in
// backward mode. A behavioural on-chip memory (one-cycle read) and a
// diagonal read port with random delay surround the unit. Forward: the
// memory at row r must become v - s; backward: the memory at n-1-r must
// become (v - s) / d with d taken from the diagonal line of the 8 rows.
// Expected values come from real arithmetic (both operations are exactly
// rounded, so results must match bit for bit). Rows outside the mask must
// stay untouched.
module tb_ilu0_unit;
  import fp64_pkg::*;
  import solver_pkg::*;
  localparam int UAW = 8, NV = 256;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic bwd, in_valid, in_ready, dreq_valid, dreq_ready, drsp_valid, uram_en, uram_we, busy;
  logic [IDX_W-1:0] n, in_row;
  logic [ADDR_W-1:0] diag_base, dreq_addr;
  vline_t in_sums;
  logic [LANES-1:0] in_mask;
  line_t drsp_data;
  logic [UAW-1:0] uram_addr;
  fp64_t uram_wdata, uram_rdata;
  logic [31:0] rows_done;
  ilu0_unit #(.UAW(UAW)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  fp64_t mem [NV];
  line_t dmem [64];
  always @(posedge clk) if (uram_en) begin
    if (uram_we) mem[uram_addr] <= uram_wdata;
    else uram_rdata <= mem[uram_addr];
  end
  // diagonal port: one request at a time, answered after 1..6 cycles
  int dwait = -1;
  logic [ADDR_W-1:0] da;
  always @(posedge clk) begin
    drsp_valid <= 1'b0;
    if (!rst_n) dwait = -1;
    else if (dwait > 0) dwait--;
    else if (dwait == 0) begin drsp_valid <= 1'b1; drsp_data <= dmem[da]; dwait = -1; end
    if (rst_n && dreq_valid && dreq_ready) begin da = dreq_addr; dwait = int'($urandom % 6); end
    dreq_ready <= $urandom % 2;
  end

  function automatic fp64_t rr();
    return $realtobits((real'($urandom % 20000) - 10000.0) / 64.0);
  endfunction

  initial begin
    fp64_t prev_mem [NV];
    in_valid = 0; bwd = 0; n = NV; diag_base = 3; in_row = 0; in_sums = '0; in_mask = '0;
    uram_rdata = '0; drsp_data = '0; dreq_ready = 0;
    for (int i = 0; i < NV; i++) mem[i] = rr();
    for (int i = 0; i < 64; i++)
      for (int k = 0; k < 8; k++) dmem[i][64*k +: 64] = $realtobits(1.5 + real'($urandom % 100) / 8.0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int row;
      @(posedge clk); #1;
      bwd = t >= 30;
      row = 8 * int'($urandom % 32);
      in_row = IDX_W'(row);
      in_mask = 8'($urandom);
      if (t % 7 == 0) in_mask = '1;
      for (int k = 0; k < 8; k++) in_sums[k] = rr();
      for (int i = 0; i < NV; i++) prev_mem[i] = mem[i];
      while (!in_ready) begin @(posedge clk); #1; end
      in_valid = 1;
      @(posedge clk); #1;
      in_valid = 0;
      while (busy) begin @(posedge clk); #1; end
      @(posedge clk); #1;
      for (int k = 0; k < 8; k++) begin
        int a;
        real e;
        a = bwd ? NV - 1 - (row + k) : row + k;
        e = $bitstoreal(prev_mem[a]) - $bitstoreal(in_sums[k]);
        if (bwd) e = e / $bitstoreal(dmem[diag_base + row / 8][64*k +: 64]);
        if (in_mask[k]) check($bitstoreal(mem[a]) == e, $sformatf("row %0d lane %0d bwd %0d", row, k, bwd));
        else            check(mem[a] == prev_mem[a], "unmasked row untouched");
      end
    end
    check(rows_done != 0, "rows counted");
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
