// vector_partition_memory: one copy of the current vector partition, serving
// two multipliers.
//
// FPGA block RAMs have at most two read ports, so the SpMV pipeline holds one
// of these per two multipliers, each with the full partition. One write
// port (the internal read unit loads all copies at once) and two read ports
// with registered output: data for rd_addr appears one cycle later. The
// organisation follows the source; DEPTH (the largest partition) is not
// given there and is this design's choice.
module vector_partition_memory #(
  parameter int DEPTH = 4096,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [63:0]   wdata,
  input  logic [AW-1:0] raddr0,
  output logic [63:0]   rdata0,
  input  logic [AW-1:0] raddr1,
  output logic [63:0]   rdata1
);
  logic [63:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata0 <= mem[raddr0];
    rdata1 <= mem[raddr1];
  end
endmodule
