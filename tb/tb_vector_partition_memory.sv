// tb_vector_partition_memory: fills the memory with random words, then reads
// random addresses on both ports at once and checks the data one cycle
// later against a reference copy; also checks write-then-read ordering.
module tb_vector_partition_memory;
  localparam int DEPTH = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0; logic [5:0] waddr = 0, raddr0 = 0, raddr1 = 0; logic [63:0] wdata = 0, rdata0, rdata1;
  vector_partition_memory #(.DEPTH(DEPTH)) dut (.*);
  int checks = 0, failures = 0;
  logic [63:0] refm [DEPTH];
  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = 6'(i); wdata = {$urandom, $urandom}; refm[i] = wdata;
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < 200; i++) begin
      logic [5:0] a0, a1;
      a0 = 6'($urandom); a1 = 6'($urandom);
      raddr0 = a0; raddr1 = a1;
      if (i % 5 == 0) begin we = 1; waddr = 6'($urandom); wdata = {$urandom, $urandom}; end
      @(negedge clk);
      checks += 2;
      if (rdata0 !== refm[a0]) begin failures++; $display("FAIL p0 %0d", a0); end
      if (rdata1 !== refm[a1]) begin failures++; $display("FAIL p1 %0d", a1); end
      if (we) begin refm[waddr] = wdata; we = 0; end
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
