// line_reader: streams a run of consecutive 512-bit lines from one memory
// read port.
//
// start loads (base, nlines); the reader then issues line requests
// base, base+1, ... on the port as long as the response FIFO has room for
// everything in flight (credit rule, so responses never need backpressure),
// and presents the responses in order on a valid/ready stream. The port
// protocol is: a request is taken when req_valid && req_ready; responses
// come back in request order, one line per rsp_valid cycle, any number of
// cycles later. busy stays high until the last line has been consumed.
// The port protocol and FIFO depth are this design's choices; the source
// uses AXI masters of 512 bits.
module line_reader
  import solver_pkg::*;
#(
  parameter int DEPTH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base,
  input  logic [IDX_W-1:0]  nlines,
  output logic              req_valid,
  input  logic              req_ready,
  output logic [ADDR_W-1:0] req_addr,
  input  logic              rsp_valid,
  input  line_t             rsp_data,
  output logic              out_valid,
  input  logic              out_ready,
  output line_t             out_data,
  output logic              busy
);
  localparam int CW = $clog2(DEPTH) + 1;
  logic [IDX_W-1:0]  remaining;
  logic [CW-1:0]     inflight, count;
  logic              fifo_in_ready;

  assign req_valid = remaining != 0 && (32'(inflight) + 32'(count)) < DEPTH;
  assign busy      = remaining != 0 || inflight != 0 || count != 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      remaining <= '0;
      req_addr  <= '0;
      inflight  <= '0;
    end else begin
      if (start) begin
        remaining <= nlines;
        req_addr  <= base;
      end else if (req_valid && req_ready) begin
        remaining <= remaining - 1'b1;
        req_addr  <= req_addr + 1'b1;
      end
      inflight <= inflight + CW'(req_valid && req_ready && !start) - CW'(rsp_valid);
    end
  end

  sync_fifo #(.W(LINE_W), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .clear(1'b0),
    .in_valid(rsp_valid), .in_ready(fifo_in_ready), .in_data(rsp_data),
    .out_valid, .out_ready, .out_data, .count
  );
endmodule
