// tb_uram_vector_memory: random writes and reads on both ports against a
// reference array; read data must appear exactly one cycle after the read.
// The depth is reduced to keep the reference small.
module tb_uram_vector_memory;
  localparam int D = 1024, AW = 10;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en0, we0, en1, we1;
  logic [AW-1:0] addr0, addr1;
  logic [63:0] wdata0, rdata0, wdata1, rdata1;
  uram_vector_memory #(.DEPTH(D)) dut (.*);
  logic [63:0] ref_m [D];
  initial begin
    logic [63:0] e0, e1;
    for (int i = 0; i < D; i++) ref_m[i] = 64'(i) * 64'h9E37_79B9;
    en0 = 1; we0 = 1; en1 = 0; we1 = 0; addr1 = '0; wdata1 = '0;
    for (int i = 0; i < D; i++) begin
      addr0 = AW'(i);
      wdata0 = ref_m[i];
      @(posedge clk);
      #1;
    end
    for (int c = 0; c < 4000; c++) begin
      en0 = $urandom % 2; we0 = $urandom % 2; addr0 = AW'($urandom); wdata0 = {$urandom, $urandom};
      en1 = $urandom % 2; we1 = $urandom % 2; addr1 = AW'($urandom); wdata1 = {$urandom, $urandom};
      if (addr1 == addr0) addr1 = addr1 + 1'b1;   // no same-address collisions
      e0 = ref_m[addr0];
      e1 = ref_m[addr1];
      @(posedge clk);
      #1;
      if (en0 && !we0) begin checks++; if (rdata0 != e0) failures++; end
      if (en1 && !we1) begin checks++; if (rdata1 != e1) failures++; end
      if (en0 && we0) ref_m[addr0] = wdata0;
      if (en1 && we1) ref_m[addr1] = wdata1;
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
