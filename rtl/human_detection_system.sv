// human_detection_system: HOG + linear-SVM human detector for one
// IMG_H x IMG_W grayscale window (130 x 66 by default), the paper's
// "HUMAN DETECTION SYSTEM".  It answers whether the window holds a person.
//
// Dataflow, as in the paper's system diagram:
//   ADDR_DECODER_MEM -> Image MEM -> HISTOGRAM_1CELL_PRENORM
//     -> BUFFER_HOG_PRENORM -> BLOCK_NORMALIZATION -> BUFFER_HOG
//   ADDR_FOR_SVM -> BUFFER_HOG + TrainedData MEM -> SVM_CLASSIFY -> Result
// Three phases run one after the other, each started by the previous one's
// done pulse:
//   1. extraction: a rising edge of iEn starts the address decoder; every
//      108 clocks one cell's 10x10 pixels are read and its 9-bin histogram
//      is written to the cell buffer (128 cells, 13824 clocks);
//   2. normalization: 105 blocks of 2x2 cells, 84 clocks each (8820 clocks);
//   3. classification: D = W.X + b over 3780 features, 4 clocks per
//      feature plus the bias (about 15130 clocks).
// A full detection takes about 37800 clocks, 0.756 ms at 50 MHz.
// The host loads the image (img_*) and the trained hyperplane (tr_*: W at
// 0..N_FEAT-1, b at N_FEAT) through write ports before raising iEn.
// oReady is high while idle; oDone pulses for one clock with oResult (1 =
// person) valid from then until the next run; oSum is D.  The phase
// sequencing by done pulses, the load ports and oSum are this design's;
// block names and the cell and block geometry follow the paper.
module human_detection_system
  import hd_pkg::*;
#(
  parameter int unsigned IMG_H = 130,
  parameter int unsigned IMG_W = 66,
  localparam int unsigned N_CELLS_Y = (IMG_H - 2) / CELL,
  localparam int unsigned N_CELLS_X = (IMG_W - 2) / CELL,
  localparam int unsigned N_CELLS   = N_CELLS_X * N_CELLS_Y,
  localparam int unsigned N_FEAT    = (N_CELLS_X - 1) * (N_CELLS_Y - 1) * BLOCK_ELEMS,
  localparam int unsigned IMG_AW    = $clog2(IMG_H * IMG_W),
  localparam int unsigned CELL_W    = $clog2(N_CELLS),
  localparam int unsigned FEAT_W    = $clog2(N_FEAT),
  localparam int unsigned TR_AW     = $clog2(N_FEAT + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              iEn,
  // image load port (host)
  input  logic              img_we,
  input  logic [IMG_AW-1:0] img_waddr,
  input  logic [7:0]        img_wdata,
  // trained-data load port (host)
  input  logic              tr_we,
  input  logic [TR_AW-1:0]  tr_waddr,
  input  fp32_t             tr_wdata,
  output logic              oReady,
  output logic              oDone,
  output logic              oResult,
  output fp32_t             oSum
);

  // phase 1: address decoder -> image memory -> histogram
  logic [IMG_AW-1:0] dec_addr;
  logic              dec_valid, dec_first, dec_busy, dec_done;
  logic [CELL_W-1:0] dec_cell;
  logic [7:0]        pix;
  logic              pix_valid, pix_first;
  logic [CELL_W-1:0] pix_cell;
  logic              hist_valid;
  hist_t             hist;
  logic [CELL_W-1:0] hist_cell;

  addr_decoder_mem #(.IMG_H(IMG_H), .IMG_W(IMG_W)) u_addr_decoder_mem (
    .clk, .rst_n, .iEn,
    .addr(dec_addr), .addr_valid(dec_valid), .first(dec_first),
    .cell_idx(dec_cell), .busy(dec_busy), .done(dec_done)
  );

  image_mem #(.IMG_H(IMG_H), .IMG_W(IMG_W)) u_image_mem (
    .clk,
    .we(img_we), .waddr(img_waddr), .wdata(img_wdata),
    .re(dec_valid), .raddr(dec_addr), .rdata(pix), .rvalid(pix_valid)
  );

  // side information that travels with the pixel through the read latency
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pix_first <= 1'b0;
      pix_cell  <= '0;
    end else begin
      pix_first <= dec_first;
      pix_cell  <= dec_cell;
    end
  end

  histogram_1cell_prenorm #(.CELL_W(CELL_W)) u_histogram_1cell_prenorm (
    .clk, .rst_n,
    .pix_valid, .pix_first, .pix, .cell_in(pix_cell),
    .hist_valid, .hist, .cell_out(hist_cell)
  );

  // phase 2: cell buffer -> block normalization -> feature buffer
  logic              pre_re, pre_rvalid;
  logic [CELL_W-1:0] pre_raddr;
  hist_t             pre_rdata;
  logic              hog_we;
  logic [FEAT_W-1:0] hog_waddr;
  fp32_t             hog_wdata;
  logic              norm_start, norm_busy, norm_done;

  buffer_hog_prenorm #(.N_CELLS(N_CELLS)) u_buffer_hog_prenorm (
    .clk,
    .we(hist_valid), .waddr(hist_cell), .wdata(hist),
    .re(pre_re), .raddr(pre_raddr), .rdata(pre_rdata), .rvalid(pre_rvalid)
  );

  // the last cell's histogram is written 103 clocks into its 108-clock
  // period, so the decoder's done (end of the period) follows it safely
  assign norm_start = dec_done;

  block_normalization #(.N_CELLS_X(N_CELLS_X), .N_CELLS_Y(N_CELLS_Y)) u_block_normalization (
    .clk, .rst_n, .start(norm_start),
    .pre_re, .pre_raddr, .pre_rdata, .pre_rvalid,
    .hog_we, .hog_waddr, .hog_wdata,
    .busy(norm_busy), .done(norm_done)
  );

  // phase 3: SVM
  logic              svm_beat, svm_bias, svm_last, svm_busy;
  logic [TR_AW-1:0]  svm_addr;
  fp32_t             hog_value, trained_value;
  logic              hog_rvalid;
  logic              beat_d, bias_d, last_d;
  logic              svm_done;

  buffer_hog #(.N_FEAT(N_FEAT)) u_buffer_hog (
    .clk,
    .we(hog_we), .waddr(hog_waddr), .wdata(hog_wdata),
    .re(svm_beat && !svm_bias), .raddr(FEAT_W'(svm_addr)),
    .rdata(hog_value), .rvalid(hog_rvalid)
  );

  addr_for_svm #(.N_FEAT(N_FEAT)) u_addr_for_svm (
    .clk, .rst_n, .start(norm_done),
    .beat(svm_beat), .addr(svm_addr), .is_bias(svm_bias), .is_last(svm_last),
    .busy(svm_busy)
  );

  trained_data_mem #(.N_FEAT(N_FEAT)) u_trained_data_mem (
    .clk,
    .we(tr_we), .waddr(tr_waddr), .wdata(tr_wdata),
    .re(svm_beat), .raddr(svm_addr), .rdata(trained_value)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat_d <= 1'b0; bias_d <= 1'b0; last_d <= 1'b0;
    end else begin
      beat_d <= svm_beat; bias_d <= svm_bias; last_d <= svm_last;
    end
  end

  svm_classify u_svm_classify (
    .clk, .rst_n,
    .in_valid(beat_d), .in_bias(bias_d), .in_last(last_d),
    .hog_value, .trained_value,
    .sum(oSum), .result(oResult), .done(svm_done)
  );

  // a feature read always comes back together with its weight
  assert property (@(posedge clk) disable iff (!rst_n) (beat_d && !bias_d) |-> hog_rvalid);

  logic svm_tail;  // the two clocks between the last beat and done
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) svm_tail <= 1'b0;
    else if (svm_beat && svm_last) svm_tail <= 1'b1;
    else if (svm_done) svm_tail <= 1'b0;
  end

  assign oDone  = svm_done;
  assign oReady = !(dec_busy || norm_busy || svm_busy || (svm_tail && !svm_done) || dec_done || norm_done);

endmodule
