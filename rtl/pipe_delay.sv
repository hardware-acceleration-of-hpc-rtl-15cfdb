// pipe_delay: N-stage register delay line of a W-bit word (N = 0 passes the
// word through). Used to keep side information aligned with the arithmetic
// pipelines. No reset: the valid bits that travel in the word are cleared by
// the caller's reset through rst_n.
module pipe_delay #(
  parameter int W = 1,
  parameter int N = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (N == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [W-1:0] r [N];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < N; i++) r[i] <= '0;
      end else begin
        r[0] <= d;
        for (int i = 1; i < N; i++) r[i] <= r[i-1];
      end
    end
    assign q = r[N-1];
  end
endmodule
