// sync_fifo: single-clock FIFO with valid/ready on both sides, used for the
// read-response buffers of the read units. DEPTH must be a power of two.
// 'count' is the number of stored words, for credit-based request issue.
module sync_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [W-1:0]           in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [W-1:0]           out_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wp, rp;
  assign count     = wp - rp;
  assign in_ready  = count < (AW+1)'(DEPTH);
  assign out_valid = count != '0;
  assign out_data  = mem[rp[AW-1:0]];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else if (clear) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (in_valid && in_ready) wp <= wp + 1'b1;
      if (out_valid && out_ready) rp <= rp + 1'b1;
    end
  end
  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wp[AW-1:0]] <= in_data;
  end
endmodule
