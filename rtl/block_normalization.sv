// block_normalization: the "BLOCK_NORMALIZATION" block.  It forms the
// overlapping 2x2-cell blocks of the window (N_CELLS_Y-1 x N_CELLS_X-1 =
// 15 x 7 blocks by default, the paper's numbers), normalizes each with
// block_normalization_core and writes the 36 results of block b to the
// feature buffer at b*36 .. b*36+35.
//
// Blocks are taken row by row.  For block (by, bx) the four cell histograms
// are read from the cell buffer on four consecutive clocks in the order
// (by,bx), (by,bx+1), (by+1,bx), (by+1,bx+1), so feature 9*q + k is bin k
// of the q-th of those cells.  The buffer answers one clock later and the
// core takes it from there (47 clocks to the scale factor, then 36 clocks
// of output).  A block therefore takes 84 clocks and the whole window
// 105 x 84 = 8820 clocks.  start begins a run; done pulses after the last
// feature is written.  The block and feature order is this design's choice:
// the paper does not give it, and the trained weights must follow it.
module block_normalization
  import hd_pkg::*;
#(
  parameter int unsigned N_CELLS_X = 8,
  parameter int unsigned N_CELLS_Y = 16,
  localparam int unsigned N_BLK_X  = N_CELLS_X - 1,
  localparam int unsigned N_BLK_Y  = N_CELLS_Y - 1,
  localparam int unsigned N_FEAT   = N_BLK_X * N_BLK_Y * BLOCK_ELEMS,
  localparam int unsigned CELL_W   = $clog2(N_CELLS_X * N_CELLS_Y),
  localparam int unsigned FEAT_W   = $clog2(N_FEAT)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  // read port of the cell-histogram buffer (one clock latency)
  output logic              pre_re,
  output logic [CELL_W-1:0] pre_raddr,
  input  hist_t             pre_rdata,
  input  logic              pre_rvalid,
  // write port of the normalized-feature buffer
  output logic              hog_we,
  output logic [FEAT_W-1:0] hog_waddr,
  output fp32_t             hog_wdata,
  output logic              busy,
  output logic              done
);

  logic [$clog2(N_BLK_Y)-1:0] by;
  logic [$clog2(N_BLK_X)-1:0] bx;
  logic [FEAT_W-1:0]          base;
  logic [2:0]                 rd;       // reads issued for this block
  logic                       core_start, core_done;
  logic                       out_valid;
  logic [5:0]                 out_idx;
  fp32_t                      out_data;
  logic                       last_blk;

  assign last_blk = (32'(by) == N_BLK_Y - 1) && (32'(bx) == N_BLK_X - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; by <= '0; bx <= '0; base <= '0;
      rd <= 3'd4; core_start <= 1'b0;
    end else begin
      done       <= 1'b0;
      core_start <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1; by <= '0; bx <= '0; base <= '0;
          rd <= '0; core_start <= 1'b1;
        end
      end else begin
        if (rd != 3'd4) rd <= rd + 3'd1;
        if (core_done) begin
          if (last_blk) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            if (32'(bx) == N_BLK_X - 1) begin
              bx <= '0;
              by <= by + 1'b1;
            end else begin
              bx <= bx + 1'b1;
            end
            base       <= base + FEAT_W'(BLOCK_ELEMS);
            rd         <= '0;
            core_start <= 1'b1;
          end
        end
      end
    end
  end

  // cell read addresses: rd = 0..3 -> TL, TR, BL, BR of block (by, bx)
  always_comb begin
    pre_re    = busy && (rd != 3'd4);
    pre_raddr = CELL_W'((32'(by) + 32'(rd[1])) * N_CELLS_X + 32'(bx) + 32'(rd[0]));
  end

  block_normalization_core u_core (
    .clk, .rst_n,
    .start     (core_start),
    .in_valid  (pre_rvalid),
    .in_cell   (pre_rdata),
    .busy      (),
    .norm_ready(),
    .rnorm     (),
    .out_valid (out_valid),
    .out_idx   (out_idx),
    .out_data  (out_data),
    .done      (core_done)
  );

  assign hog_we    = out_valid;
  assign hog_waddr = base + FEAT_W'(out_idx);
  assign hog_wdata = out_data;

endmodule
