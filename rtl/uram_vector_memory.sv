// uram_vector_memory: the on-chip multiplicand vector memory.
//
// One large memory holds the vector that the SpMV multiplies (and, during
// ILU0 application, the vector being substituted in place) exactly once.
// DEPTH = 262144 doubles, so matrices may have at most 262144 columns, as in
// the source. Two independent ports, each read or write per cycle; a read
// returns data one cycle after en with we = 0. Port 0 serves the internal
// read unit (partition gathers), port 1 the ILU0 unit and the solver's
// vector fill and drain.
module uram_vector_memory #(
  parameter int DEPTH = 262144,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          en0,
  input  logic          we0,
  input  logic [AW-1:0] addr0,
  input  logic [63:0]   wdata0,
  output logic [63:0]   rdata0,
  input  logic          en1,
  input  logic          we1,
  input  logic [AW-1:0] addr1,
  input  logic [63:0]   wdata1,
  output logic [63:0]   rdata1
);
  logic [63:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (en0) begin
      if (we0) mem[addr0] <= wdata0;
      else     rdata0 <= mem[addr0];
    end
  end
  always_ff @(posedge clk) begin
    if (en1) begin
      if (we1) mem[addr1] <= wdata1;
      else     rdata1 <= mem[addr1];
    end
  end
endmodule
