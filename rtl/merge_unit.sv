// merge_unit: gathers the finished row results of one cycle - those the
// selective adder tree completed (lanes flagged by the control unit) and the
// one the reduce unit may deliver - onto NOUT dense output ports: the i-th
// valid input goes to port i, adder-tree lanes first in lane order, the
// reduce result last. With LANES + 1 ports no result ever waits, so the
// merge never stalls the pipeline. Registered, one cycle latency.
// The source says the merge unit packs all results onto a set number of
// ports towards the result memory; the port count is this design's choice.
module merge_unit
  import fp64_pkg::*;
  import solver_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [LANES-1:0]             lane_valid,
  input  iline_t                       lane_row,
  input  vline_t                       lane_val,
  input  logic                         red_valid,
  input  logic [IDX_W-1:0]             red_row,
  input  fp64_t                        red_val,
  output logic [NOUT-1:0]              out_valid,
  output logic [NOUT-1:0][IDX_W-1:0]   out_row,
  output logic [NOUT-1:0][63:0]        out_val
);
  logic [NOUT-1:0]            iv;
  logic [NOUT-1:0][IDX_W-1:0] ir;
  logic [NOUT-1:0][63:0]      ivl;
  logic [NOUT-1:0]            cv;
  logic [NOUT-1:0][IDX_W-1:0] cr;
  logic [NOUT-1:0][63:0]      cvl;

  always_comb begin
    int n;
    iv  = {red_valid, lane_valid};
    ir  = {red_row, lane_row};
    ivl = {red_val, lane_val};
    cv  = '0;
    cr  = '0;
    cvl = '0;
    n   = 0;
    for (int i = 0; i < NOUT; i++) begin
      if (iv[i]) begin
        cv[n]  = 1'b1;
        cr[n]  = ir[i];
        cvl[n] = ivl[i];
        n++;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= '0;
    else        out_valid <= cv;
  end
  always_ff @(posedge clk) begin
    out_row <= cr;
    out_val <= cvl;
  end
endmodule
