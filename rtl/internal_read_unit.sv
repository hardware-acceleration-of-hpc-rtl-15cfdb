// internal_read_unit: fetches a color's vector partition from the on-chip
// vector memory and loads it into the SpMV unit's partition memories.
//
// Gather (start_gather, npart): pops npart global vector indices from the
// partition-index stream that the external read unit delivers, reads the
// vector memory at each index (port 0, one read per cycle) and stores the
// values in order in a staging buffer. Transfer (start_transfer): copies
// staging entries 0..npart-1 into all vector partition memories at once,
// one value per cycle. Keeping the staged copy lets the gather of the next
// color's partition overlap the SpMV of the current one (look-ahead), with
// only the transfer left between colors, as the source's task flow shows.
// gather_done / xfer_done pulse when a job ends; busy is high during either.
// The staging buffer depth and one value per cycle are this design's
// choices.
module internal_read_unit
  import fp64_pkg::*;
  import solver_pkg::*;
#(
  parameter int PART_DEPTH = 4096,
  parameter int UAW        = 18,
  parameter int PAW        = $clog2(PART_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start_gather,
  input  logic             start_transfer,
  input  logic [IDX_W-1:0] npart,
  input  logic             idx_valid,
  output logic             idx_ready,
  input  logic [IDX_W-1:0] idx,
  output logic             uram_en,
  output logic [UAW-1:0]   uram_addr,
  input  fp64_t            uram_rdata,
  output logic             vpm_we,
  output logic [PAW-1:0]   vpm_waddr,
  output fp64_t            vpm_wdata,
  output logic             busy,
  output logic             gather_done,
  output logic             xfer_done
);
  fp64_t            stage [PART_DEPTH];
  logic             gathering, xfering;
  logic [IDX_W-1:0] n, cnt_issue, cnt_wr, cnt_x;
  logic             rd_pend;
  fp64_t            stage_q;
  logic             x_pend;
  logic [PAW-1:0]   x_addr;

  assign busy      = gathering || xfering;
  assign idx_ready = gathering && cnt_issue < n;
  assign uram_en   = idx_valid && idx_ready;
  assign uram_addr = idx[UAW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gathering   <= 1'b0;
      xfering     <= 1'b0;
      n           <= '0;
      cnt_issue   <= '0;
      cnt_wr      <= '0;
      cnt_x       <= '0;
      rd_pend     <= 1'b0;
      x_pend      <= 1'b0;
      gather_done <= 1'b0;
      xfer_done   <= 1'b0;
      vpm_we      <= 1'b0;
      vpm_waddr   <= '0;
      x_addr      <= '0;
    end else begin
      gather_done <= 1'b0;
      xfer_done   <= 1'b0;
      vpm_we      <= 1'b0;
      if (start_gather) begin
        gathering <= 1'b1;
        n         <= npart;
        cnt_issue <= '0;
        cnt_wr    <= '0;
      end
      if (start_transfer) begin
        xfering <= 1'b1;
        n       <= npart;
        cnt_x   <= '0;
      end
      // gather: issue reads, write staging one cycle later
      rd_pend <= uram_en;
      if (uram_en) cnt_issue <= cnt_issue + 1'b1;
      if (rd_pend) cnt_wr <= cnt_wr + 1'b1;
      if (gathering && !start_gather && cnt_wr == n && !rd_pend) begin
        gathering   <= 1'b0;
        gather_done <= 1'b1;
      end
      // transfer: read staging, write partition memories one cycle later
      x_pend <= xfering && !start_transfer && cnt_x < n;
      if (xfering && !start_transfer && cnt_x < n) begin
        x_addr <= cnt_x[PAW-1:0];
        cnt_x  <= cnt_x + 1'b1;
      end
      if (x_pend) begin
        vpm_we    <= 1'b1;
        vpm_waddr <= x_addr;
      end
      if (xfering && !start_transfer && cnt_x == n && !x_pend && !vpm_we) begin
        xfering   <= 1'b0;
        xfer_done <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rd_pend) stage[cnt_wr[PAW-1:0]] <= uram_rdata;
    stage_q <= stage[cnt_x[PAW-1:0]];
  end

  always_ff @(posedge clk) vpm_wdata <= stage_q;
endmodule
