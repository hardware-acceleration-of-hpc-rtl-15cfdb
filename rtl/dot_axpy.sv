// dot_axpy: eight-lane double-precision vector unit for axpy and dot.
//
// Eight multipliers and eight adders, one 8-element line per cycle.
//   axpy (mode VOP_AXPY): y[k] = alpha * a[k] + b[k] in eight parallel
//     lanes; results leave on out_* MUL_LAT + ADD_LAT cycles after the input.
//   dot (mode VOP_DOT): products a[k] * b[k] (masked lanes forced to 0) go
//     through a three-level tree made of adders 0..6, giving one partial sum
//     per cycle. Adder 7 is the final accumulator. Since it is pipelined, a
//     plain feedback would mix sums from different cycles, so a small reduce
//     logic picks two operands each cycle out of the new partial sum t, the
//     adder's own output y and one hold register h (t+y, t+h or y+h), parking
//     a lone value in h. When the stream has ended (in_last seen) and the
//     tree and adder are empty, h is the dot product; dot_valid pulses.
// start clears the dot state; the mode must not change while busy.
//
// Following the source: 8 multipliers + 8 adders, adder tree plus final
// adder with feedback reduce logic. The exact pairing rule and pipeline
// depths are this design's choices.
module dot_axpy
  import fp64_pkg::*;
  import solver_pkg::*;
#(
  parameter int MUL_LAT = 2,
  parameter int ADD_LAT = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  vop_e             mode,
  input  fp64_t            alpha,
  input  logic             start,
  input  logic             in_valid,
  input  logic             in_last,
  input  vline_t           a,
  input  vline_t           b,
  input  logic [LANES-1:0] mask,
  output logic             out_valid,
  output vline_t           out_vals,
  output logic [LANES-1:0] out_mask,
  output logic             dot_valid,
  output fp64_t            dot_result,
  output logic             busy
);
  logic             dot;
  assign dot = mode == VOP_DOT;

  // multipliers
  vline_t           mb, prod;
  logic [LANES-1:0] pv;
  for (genvar k = 0; k < LANES; k++) begin : g_mul
    assign mb[k] = dot ? b[k] : alpha;
    fp64_mul #(.LAT(MUL_LAT)) u_mul (
      .clk, .rst_n, .in_valid(in_valid), .a(mask[k] ? a[k] : FP64_ZERO), .b(mb[k]),
      .out_valid(pv[k]), .y(prod[k])
    );
  end
  vline_t           bd;
  logic [LANES-1:0] md;
  logic             lastd;
  pipe_delay #(.W(LANES*64 + LANES + 1), .N(MUL_LAT)) u_bd (
    .clk, .rst_n, .d({b, mask, in_last}), .q({bd, md, lastd})
  );

  // adders: lanes in axpy, tree + accumulator in dot
  fp64_t [7:0]      aa, ab, ay;
  logic  [7:0]      av, ayv;
  fp64_t            a7a, a7b;
  logic             a7v;
  for (genvar k = 0; k < 8; k++) begin : g_add
    fp64_add #(.LAT(ADD_LAT)) u_add (
      .clk, .rst_n, .in_valid(av[k]), .a(aa[k]), .b(ab[k]), .out_valid(ayv[k]), .y(ay[k])
    );
  end

  always_comb begin
    for (int k = 0; k < 8; k++) begin
      aa[k] = prod[k];
      ab[k] = bd[k];
      av[k] = pv[k];
    end
    if (dot) begin
      for (int k = 0; k < 4; k++) begin
        aa[k] = prod[2*k];
        ab[k] = prod[2*k+1];
        av[k] = pv[0];
      end
      aa[4] = ay[0]; ab[4] = ay[1]; av[4] = ayv[0];
      aa[5] = ay[2]; ab[5] = ay[3]; av[5] = ayv[2];
      aa[6] = ay[4]; ab[6] = ay[5]; av[6] = ayv[4];
      aa[7] = a7a;   ab[7] = a7b;   av[7] = a7v;
    end
  end

  assign out_valid = !dot && ayv[0];
  assign out_vals  = ay;
  pipe_delay #(.W(LANES), .N(ADD_LAT)) u_md (.clk, .rst_n, .d(md), .q(out_mask));

  // final accumulation
  logic        t_v, y_v, h_v, ended;
  fp64_t       t, y, h;
  logic [15:0] tree_cnt, acc_cnt;
  logic        done_q;
  assign t_v = dot && ayv[6];
  assign t   = ay[6];
  assign y_v = dot && ayv[7];
  assign y   = ay[7];

  always_comb begin
    a7v = 1'b0;
    a7a = t;
    a7b = y;
    if (t_v && y_v)      begin a7v = 1'b1; end
    else if (t_v && h_v) begin a7v = 1'b1; a7b = h; end
    else if (y_v && h_v) begin a7v = 1'b1; a7a = h; end
  end

  assign busy = tree_cnt != 0 || acc_cnt != 0 || (dot && !done_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_v        <= 1'b0;
      h          <= FP64_ZERO;
      ended      <= 1'b1;
      tree_cnt   <= '0;
      acc_cnt    <= '0;
      dot_valid  <= 1'b0;
      dot_result <= FP64_ZERO;
    end else begin
      dot_valid <= 1'b0;
      if (start) begin
        h_v   <= 1'b0;
        ended <= 1'b0;
      end else begin
        tree_cnt <= tree_cnt + 16'(dot && in_valid) - 16'(t_v);
        acc_cnt  <= acc_cnt + 16'(a7v) - 16'(y_v);
        if (dot && in_valid && in_last) ended <= 1'b1;
        // hold register
        if (t_v && y_v) begin
          // h unchanged
        end else if ((t_v || y_v) && h_v) begin
          h_v <= 1'b0;
        end else if (t_v) begin
          h_v <= 1'b1; h <= t;
        end else if (y_v) begin
          h_v <= 1'b1; h <= y;
        end
        if (dot && ended && !dot_valid && tree_cnt == 0 && acc_cnt == 0 && !t_v && !y_v
            && !done_q) begin
          dot_valid  <= 1'b1;
          dot_result <= h_v ? h : FP64_ZERO;
        end
      end
    end
  end

  // one result per started stream
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         done_q <= 1'b1;
    else if (start)     done_q <= 1'b0;
    else if (dot_valid) done_q <= 1'b1;
  end
endmodule
