// selective_adder_tree: adds, within one line of products, all products
// that belong to the same matrix row.
//
// The products of one cycle form segments, one per row, marked by head
// flags from the control unit. The tree is a segmented prefix sum over the
// LANES lanes in log2(LANES) adder levels: at level d, lane k adds lane
// k-2^d unless a segment head lies between them. After the last level the
// lane at the end of each segment holds that segment's sum (other lanes
// hold partial sums and are ignored downstream). Each level is one register
// stage, so results appear log2(LANES) cycles after in_valid; one line can
// enter every cycle. The function (adding the values of one row within one
// cycle, controlled by the control unit) is from the source; the segmented
// scan structure and its latency are this design's choice.
module selective_adder_tree
  import fp64_pkg::*;
  import solver_pkg::*;
#(
  parameter int N = LANES
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [N-1:0][63:0]  in_val,
  input  logic [N-1:0]        in_head,
  output logic                out_valid,
  output logic [N-1:0][63:0]  out_sum
);
  localparam int L = $clog2(N);
  logic [N-1:0][63:0] v [L+1];
  logic [N-1:0]       f [L+1];
  logic [L:0]         vld;

  assign v[0]   = in_val;
  assign f[0]   = in_head;
  assign vld[0] = in_valid;

  for (genvar l = 0; l < L; l++) begin : g_lvl
    localparam int D = 1 << l;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld[l+1] <= 1'b0;
      else        vld[l+1] <= vld[l];
    end
    always_ff @(posedge clk) begin
      for (int k = 0; k < N; k++) begin
        if (k >= D && !f[l][k]) v[l+1][k] <= fp64_add_f(v[l][k-D], v[l][k]);
        else                    v[l+1][k] <= v[l][k];
        f[l+1][k] <= (k >= D) ? (f[l][k] | f[l][k-D]) : f[l][k];
      end
    end
  end

  assign out_valid = vld[L];
  assign out_sum   = v[L];
endmodule
