// tb_internal_read_unit: gathers partitions of random size from a
// behavioural on-chip memory through an index stream with random gaps,
// then transfers them. Every partition-memory write must carry address i
// and the memory value at index i of the partition, each exactly once; the
// transfer must move one value per cycle (npart writes in npart cycles,
// plus a fixed start-up of at most 4 cycles).
module tb_internal_read_unit;
  import fp64_pkg::*;
  import solver_pkg::*;
  localparam int PD = 64, UAW = 10, PAW = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start_gather, start_transfer, idx_valid, idx_ready, uram_en, vpm_we, busy, gather_done, xfer_done;
  logic [IDX_W-1:0] npart, idx;
  logic [UAW-1:0] uram_addr;
  fp64_t uram_rdata, vpm_wdata;
  logic [PAW-1:0] vpm_waddr;
  internal_read_unit #(.PART_DEPTH(PD), .UAW(UAW)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  fp64_t mem [1 << UAW];
  always @(posedge clk) if (uram_en) uram_rdata <= mem[uram_addr];
  fp64_t got [PD];
  int nwr;
  always @(posedge clk) if (rst_n && vpm_we) begin got[vpm_waddr] <= vpm_wdata; nwr++; end

  initial begin
    int ids [PD];
    int np, t0, t1;
    start_gather = 0; start_transfer = 0; idx_valid = 0; idx = 0; npart = 0; uram_rdata = '0;
    for (int i = 0; i < (1 << UAW); i++) mem[i] = {$urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      np = 1 + int'($urandom % PD);
      for (int i = 0; i < np; i++) ids[i] = int'($urandom % (1 << UAW));
      @(posedge clk); #1;
      npart = IDX_W'(np);
      start_gather = 1;
      @(posedge clk); #1;
      start_gather = 0;
      for (int i = 0; i < np; i++) begin
        while (($urandom % 3) == 0) begin idx_valid = 0; @(posedge clk); #1; end
        idx_valid = 1;
        idx = IDX_W'(ids[i]);
        @(posedge clk);
        while (!idx_ready) @(posedge clk);
        #1;
      end
      idx_valid = 0;
      while (busy) begin @(posedge clk); #1; end
      nwr = 0;
      start_transfer = 1;
      t0 = $time;
      @(posedge clk); #1;
      start_transfer = 0;
      while (!xfer_done) begin @(posedge clk); #1; end
      t1 = $time;
      check(nwr == np, "one write per element");
      check((t1 - t0) / 10 <= np + 4, "one value per cycle");
      for (int i = 0; i < np; i++) check(got[i] == mem[ids[i]], "gathered value");
    end
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
