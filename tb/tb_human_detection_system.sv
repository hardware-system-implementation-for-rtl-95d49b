// tb_human_detection_system: end-to-end test of the detector at its full
// size (130 x 66 window, 3780 features), with the top's default parameters.
//
// A test image is generated (smooth shapes plus noise), with pixels nudged
// until no gradient angle lies within 0.05 degree of a bin edge, so that the
// CORDIC's small angle error cannot move a vote.  A reference model in
// double precision (eqs. (1)-(7), votes from cordic_ref_pkg) gives every
// normalized feature and the SVM sum.  Random weights are loaded, and the
// bias is set from the reference so that the first run must answer
// "person" (D = +4) and the second, after only the bias is reloaded, "no
// person" (D = -4).  Checked: all 3780 features in the feature buffer
// (0.5% + 1e-4), D (0.5% of sum |w x| + 1e-3), the result, the total
// detection time in clocks, and oReady.  It also counts, in the design,
// the CORDIC early exits (Y = 0 on entry and mid-loop), the folding of
// gradients with X < 0, the use of every histogram bin and both results;
// one that never happened counts as a failure.
module tb_human_detection_system;
  import hd_pkg::*;
  import fp_ref_pkg::*;
  import cordic_ref_pkg::*;

  localparam int H = 130, W = 66, NCY = 16, NCX = 8, NF = 3780;

  logic clk = 0, rst_n = 0, iEn = 0;
  logic img_we = 0;
  logic [13:0] img_waddr = 0;
  logic [7:0] img_wdata = 0;
  logic tr_we = 0;
  logic [11:0] tr_waddr = 0;
  fp32_t tr_wdata = 0;
  logic oReady, oDone, oResult;
  fp32_t oSum;

  human_detection_system dut (.*);

  always #10 clk = ~clk;   // 50 MHz

  int checks = 0, failures = 0;
  int img [H][W];
  real cellh [NCY][NCX][BINS];
  real feat [NF];
  real wgt [NF];
  real dot, absdot;
  int  h_ = H, w_ = W, ncy = NCY, ncx = NCX, nf = NF, nb = BINS;

  // mechanism counters, observed inside the design
  int n_entry_exit = 0, n_mid_exit = 0, n_fold = 0, n_person = 0, n_noperson = 0;
  int bin_hits [BINS];
  int cyc = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && dut.u_histogram_1cell_prenorm.s1_v) begin
      if (dut.u_histogram_1cell_prenorm.cy_in == 0) n_entry_exit++;
      else if (dut.u_histogram_1cell_prenorm.u_cordic.y[CORDIC_N] == 0) n_mid_exit++;
      if (dut.u_histogram_1cell_prenorm.s1_fy < 0) n_fold++;
    end
    if (rst_n && dut.u_histogram_1cell_prenorm.s3_v)
      bin_hits[dut.u_histogram_1cell_prenorm.s3_bin]++;
  end

  function automatic void check_real(input string what, input int i, input real got,
                                     input real exp_v, input real tol);
    checks++;
    if (got - exp_v > tol || exp_v - got > tol) begin
      failures++;
      if (failures < 20) $display("FAIL %s[%0d] got %f expected %f", what, i, got, exp_v);
    end
  endfunction

  task automatic make_image();
    int found, pass, fx, fy, b;
    real m;
    bit near;
    for (int r = 0; r < h_; r++)
      for (int c = 0; c < w_; c++) begin
        int v;
        v = 60 + ((r - 40) * (r - 40) + (c - 33) * (c - 33) < 400 ? 120 : 0)
               + ((r > 70 && r < 120 && c > 20 && c < 45) ? 50 : 0)
               + (r * 3 + c) / 4 + int'($urandom_range(24));
        img[r][c] = (v > 255) ? 255 : v;
      end
    pass = 0;
    do begin
      found = 0;
      for (int r = 1; r < h_ - 1; r++)
        for (int c = 1; c < w_ - 1; c++) begin
          fx = img[r][c+1] - img[r][c-1];
          fy = img[r+1][c] - img[r-1][c];
          vote(fx, fy, b, m, near);
          if (near) begin
            img[r][c+1] = img[r][c+1] ^ 1;
            found++;
          end
        end
      pass++;
    end while (found != 0 && pass < 50);
    checks++;
    if (found != 0) begin
      failures++; $display("FAIL could not clear bin-edge angles");
    end
  endtask

  task automatic reference();
    int fx, fy, b, r, c, k;
    real m, s, nrm;
    bit near;
    for (int cy = 0; cy < ncy; cy++)
      for (int cx = 0; cx < ncx; cx++) begin
        for (k = 0; k < nb; k++) cellh[cy][cx][k] = 0.0;
        for (int i = 1; i <= 64; i++) begin
          r = cy * 8 + (i - 1) / 8 + 1;
          c = cx * 8 + (i - 1) % 8 + 1;
          fx = img[r][c+1] - img[r][c-1];
          fy = img[r+1][c] - img[r-1][c];
          vote(fx, fy, b, m, near);
          cellh[cy][cx][b] = cellh[cy][cx][b] + m;
        end
      end
    for (int blk = 0; blk < (ncy - 1) * (ncx - 1); blk++) begin
      int by, bx;
      by = blk / (ncx - 1); bx = blk % (ncx - 1);
      s = 0.0;
      for (int q = 0; q < 4; q++)
        for (k = 0; k < nb; k++) s = s + cellh[by + q / 2][bx + q % 2][k] ** 2;
      nrm = $sqrt(s + 0.01);
      for (int q = 0; q < 4; q++)
        for (k = 0; k < nb; k++)
          feat[blk * 36 + q * 9 + k] = cellh[by + q / 2][bx + q % 2][k] / nrm;
    end
  endtask

  task automatic run_once(input logic exp_result, input real exp_d, input int run);
    int t0, t1;
    @(negedge clk);
    checks++;
    if (!oReady) begin failures++; $display("FAIL not ready before run"); end
    iEn = 1;
    t0 = cyc;
    @(negedge clk);
    iEn = 0;
    @(negedge clk);
    checks++;
    if (oReady) begin failures++; $display("FAIL ready while busy"); end
    wait (oDone === 1'b1);
    t1 = cyc;
    @(negedge clk);
    $display("run %0d: %0d clocks (%0.3f ms at 50 MHz), D = %f, result = %0d",
             run, t1 - t0, real'(t1 - t0) / 50000.0, fp2real(oSum), oResult);
    // 128 cells x 108 + 105 blocks x 84 + 3781 beats x 4, plus a few clocks of latency
    checks++;
    if (t1 - t0 < 37768 || t1 - t0 > 37790) begin
      failures++; $display("FAIL detection took %0d clocks", t1 - t0);
    end
    for (int i = 0; i < nf; i++)
      check_real("feature", i, fp2real(dut.u_buffer_hog.mem[i]), feat[i], 0.005 * feat[i] + 1e-4);
    check_real("D", run, fp2real(oSum), exp_d, 0.005 * absdot + 1e-3);
    checks++;
    if (oResult !== exp_result) begin
      failures++; $display("FAIL result %0d expected %0d", oResult, exp_result);
    end
    if (oResult) n_person++; else n_noperson++;
    checks++;
    if (!oReady) begin failures++; $display("FAIL not ready after run"); end
  endtask

  initial begin
    for (int k = 0; k < BINS; k++) bin_hits[k] = 0;
    make_image();
    reference();
    dot = 0.0; absdot = 0.0;
    for (int i = 0; i < nf; i++) begin
      wgt[i] = (real'($urandom_range(2000)) - 1000.0) / 1000.0;
      // round the weight to single precision so the reference uses it exactly
      wgt[i] = fp2real(real2fp(wgt[i]));
      dot = dot + wgt[i] * feat[i];
      absdot = absdot + (wgt[i] * feat[i] < 0 ? -wgt[i] * feat[i] : wgt[i] * feat[i]);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // load the image and the hyperplane
    for (int i = 0; i < h_ * w_; i++) begin
      @(negedge clk);
      img_we = 1; img_waddr = 14'(i); img_wdata = 8'(img[i / W][i % W]);
    end
    @(negedge clk);
    img_we = 0;
    for (int i = 0; i <= nf; i++) begin
      @(negedge clk);
      tr_we = 1; tr_waddr = 12'(i);
      tr_wdata = (i == nf) ? real2fp(-dot + 4.0) : real2fp(wgt[i]);
    end
    @(negedge clk);
    tr_we = 0;
    run_once(1'b1, 4.0, 1);
    // second run: only the bias changes, the answer must flip
    @(negedge clk);
    tr_we = 1; tr_waddr = 12'(nf); tr_wdata = real2fp(-dot - 4.0);
    @(negedge clk);
    tr_we = 0;
    run_once(1'b0, -4.0, 2);

    $display("mechanisms: cordic exit on entry %0d, cordic exit mid-loop %0d, fold X<0 %0d, person %0d, no person %0d",
             n_entry_exit, n_mid_exit, n_fold, n_person, n_noperson);
    checks += 5;
    if (n_entry_exit == 0) begin failures++; $display("FAIL no CORDIC exit on entry"); end
    if (n_mid_exit == 0)   begin failures++; $display("FAIL no CORDIC mid-loop exit"); end
    if (n_fold == 0)       begin failures++; $display("FAIL no X<0 fold"); end
    if (n_person == 0)     begin failures++; $display("FAIL no person result"); end
    if (n_noperson == 0)   begin failures++; $display("FAIL no no-person result"); end
    for (int k = 0; k < BINS; k++) begin
      checks++;
      if (bin_hits[k] == 0) begin failures++; $display("FAIL bin %0d never used", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
