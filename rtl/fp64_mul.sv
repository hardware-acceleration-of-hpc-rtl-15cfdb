// fp64_mul: pipelined IEEE-754 double-precision multiplier.
// The product of a and b (rounding as in fp64_pkg) appears on y LAT cycles after
// in_valid, with out_valid. One operation may start every cycle. The
// operator count (8 multipliers per unit) follows the source; the latency is this
// design's choice.
module fp64_mul #(
  parameter int LAT = 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  fp64_pkg::fp64_t     a,
  input  fp64_pkg::fp64_t     b,
  output logic                out_valid,
  output fp64_pkg::fp64_t     y
);
  import fp64_pkg::*;
  fp64_t s0;
  logic  v0;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v0 <= 1'b0;
    else        v0 <= in_valid;
  end
  always_ff @(posedge clk) s0 <= fp64_mul_f(a, b);
  pipe_delay #(.W(65), .N(LAT-1)) u_dly (.clk, .rst_n, .d({v0, s0}), .q({out_valid, y}));
endmodule
