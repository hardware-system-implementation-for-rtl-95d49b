// histogram_1cell_prenorm: the "HISTOGRAM_1CELL_PRENORM" block, the HOG
// feature extractor of one 8x8 cell.
//
// Input: the 10x10 pixels of the cell and its one-pixel border, one per
// clock in raster order (pix_first marks the first, cell_in carries the cell
// number).  The pixels go into a 10x10 window register.  As soon as the
// pixel below an interior pixel (r, c) arrives, its gradient is formed as in
// the paper's eqs. (1)-(2):
//   fx = f(r, c+1) - f(r, c-1),   fy = f(r+1, c) - f(r-1, c)
// and then, one stage per clock:
//   1. gradient register;
//   2. CORDIC (module cordic) with X = fy, Y = fx, i.e. theta = arctan(fx/fy)
//      as in eq. (4).  A gradient with X < 0 is negated first, which turns
//      the angle by 180 degrees: the orientation is unsigned;
//   3. the angle is brought into 0..180 degrees and binned into 9 bins of
//      20 degrees; the fixed-point magnitude becomes single precision;
//   4. the magnitude is added (single-precision adder) to its bin.
// One clock after the last interior pixel is accumulated, hist_valid pulses
// with the 9 bins and the cell number: 103 clocks after the cell's first
// pixel, inside the paper's 108-cycle cell period.  A new cell may follow
// back to back.
// The paper gives eqs. (1)-(4), 8x8 cells, 9 bins and the use of CORDIC;
// it does not say how bins are laid out or whether votes are interpolated.
// Here bin k covers [20k, 20k+20) degrees and each pixel votes its whole
// magnitude into one bin ("the addition of the result to the relevant cell
// bin"), the folding to 0..180 degrees and the pipeline are this design's.
module histogram_1cell_prenorm
  import hd_pkg::*;
#(
  parameter int unsigned CELL_W = 7
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              pix_valid,
  input  logic              pix_first,
  input  logic [7:0]        pix,
  input  logic [CELL_W-1:0] cell_in,
  output logic              hist_valid,
  output hist_t             hist,
  output logic [CELL_W-1:0] cell_out
);

  logic [7:0] win [WIN][WIN];
  logic [3:0] r, c;          // position of the next pixel
  logic [3:0] pr, pc;        // position of the pixel on the input now
  logic [CELL_W-1:0] cur_cell;

  // stage 1: gradient
  logic                     s1_v, s1_first, s1_last;
  logic signed [GRAD_W-1:0] s1_fx, s1_fy;
  logic [CELL_W-1:0]        s1_cell;
  // stage 2: CORDIC result
  logic                     s2_v, s2_first, s2_last;
  logic [CW-1:0]            s2_mag;
  logic signed [AW-1:0]     s2_ang;
  logic [CELL_W-1:0]        s2_cell;
  // stage 3: bin and fp magnitude
  logic                     s3_v, s3_first, s3_last;
  logic [3:0]               s3_bin;
  fp32_t                    s3_mag;
  logic [CELL_W-1:0]        s3_cell;
  // stage 4: accumulation
  logic                     s4_last;
  logic [CELL_W-1:0]        s4_cell;

  logic signed [GRAD_W-1:0] cx_in, cy_in;
  logic [CW-1:0]            c_mag;
  logic signed [AW-1:0]     c_ang;
  logic signed [AW-1:0]     ang_u;
  logic [3:0]               bin;
  fp32_t                    mag_fp, acc_sum;
  logic                     interior;

  assign pr = pix_first ? 4'd0 : r;
  assign pc = pix_first ? 4'd0 : c;
  assign interior = pix_valid && (pr >= 4'd2) && (pc >= 4'd1) && (pc <= 4'(CELL));

  always_ff @(posedge clk) begin
    if (pix_valid) win[pr][pc] <= pix;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r <= '0; c <= '0; cur_cell <= '0;
      s1_v <= 1'b0; s2_v <= 1'b0; s3_v <= 1'b0; s4_last <= 1'b0;
      s1_first <= 1'b0; s1_last <= 1'b0; s2_first <= 1'b0; s2_last <= 1'b0;
      s3_first <= 1'b0; s3_last <= 1'b0;
      s1_fx <= '0; s1_fy <= '0; s2_mag <= '0; s2_ang <= '0; s3_bin <= '0; s3_mag <= '0;
      s1_cell <= '0; s2_cell <= '0; s3_cell <= '0; s4_cell <= '0;
      hist <= '0; hist_valid <= 1'b0; cell_out <= '0;
    end else begin
      if (pix_valid) begin
        if (pix_first) cur_cell <= cell_in;
        if (pc == 4'(WIN - 1)) begin
          c <= '0;
          r <= pr + 4'd1;
        end else begin
          c <= pc + 4'd1;
          r <= pr;
        end
      end
      // stage 1: eqs. (1) and (2) for interior pixel (pr-1, pc)
      s1_v     <= interior;
      s1_first <= interior && pr == 4'd2 && pc == 4'd1;
      s1_last  <= interior && pr == 4'(WIN - 1) && pc == 4'(CELL);
      s1_cell  <= pix_first ? cell_in : cur_cell;
      s1_fx    <= $signed({1'b0, win[pr-4'd1][pc+4'd1]}) - $signed({1'b0, win[pr-4'd1][pc-4'd1]});
      s1_fy    <= $signed({1'b0, pix}) - $signed({1'b0, win[pr-4'd2][pc]});
      // stage 2: CORDIC
      s2_v <= s1_v; s2_first <= s1_first; s2_last <= s1_last; s2_cell <= s1_cell;
      s2_mag <= c_mag;
      s2_ang <= c_ang;
      // stage 3: binning and conversion
      s3_v <= s2_v; s3_first <= s2_first; s3_last <= s2_last; s3_cell <= s2_cell;
      s3_bin <= bin;
      s3_mag <= mag_fp;
      // stage 4: accumulate into the bin
      if (s3_v) begin
        if (s3_first) begin
          hist <= '0;
          hist[s3_bin] <= s3_mag;
        end else begin
          hist[s3_bin] <= acc_sum;
        end
      end
      s4_last <= s3_v && s3_last;
      s4_cell <= s3_cell;
      hist_valid <= s4_last;
      if (s4_last) cell_out <= s4_cell;
    end
  end

  // fold X < 0 into the right half-plane (unsigned orientation)
  always_comb begin
    cx_in = s1_fy;
    cy_in = s1_fx;
    if (s1_fy < 0) begin
      cx_in = -s1_fy;
      cy_in = -s1_fx;
    end
  end

  cordic u_cordic (.x_in(cx_in), .y_in(cy_in), .mag(c_mag), .angle(c_ang));

  // angle into [0, 180) and 9 bins of 20 degrees
  always_comb begin
    ang_u = s2_ang;
    if (ang_u < 0) ang_u = ang_u + DEG180;
    if (ang_u >= DEG180) ang_u = ang_u - DEG180;
    bin = '0;
    for (int k = 1; k < BINS; k++)
      if (ang_u >= AW'(k) * DEG20) bin = 4'(k);
  end

  fix2fp #(.W(CW), .FRAC(CFRAC)) u_fix2fp (.x(s2_mag), .y(mag_fp));

  fp_add u_acc (.a(hist[s3_bin]), .b(s3_mag), .sub(1'b0), .y(acc_sum));

endmodule
