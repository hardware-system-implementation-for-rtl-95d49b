// tb_block_normalization: self-checking test of the block walker at the
// default 16 x 8 cells (15 x 7 blocks, 3780 features).
//
// The cell-histogram buffer is modelled here (one clock read latency) and
// filled with random histograms.  Every feature write must go to a distinct
// address b*36 + 9*q + k, with the value bin k of cell q of block b (cells
// in the order top-left, top-right, bottom-left, bottom-right) divided by
// sqrt(sum of squares + 0.01), within a relative 1e-5.  All 3780 addresses
// must be written once, and done must come 105 x 84 clocks after start.
module tb_block_normalization;
  import hd_pkg::*;
  import fp_ref_pkg::*;

  localparam int NCX = 8, NCY = 16, NF = 3780;

  logic clk = 0, rst_n = 0, start = 0;
  logic pre_re, pre_rvalid = 0;
  logic [6:0] pre_raddr;
  hist_t pre_rdata = '0;
  logic hog_we, busy, done;
  logic [11:0] hog_waddr;
  fp32_t hog_wdata;
  int checks = 0, failures = 0, cyc = 0, t0 = 0;
  hist_t cells [NCX * NCY];
  real feat [NF];
  int written [NF];
  int nf = NF, ncells = NCX * NCY, nbin = BINS;

  block_normalization dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // cell buffer model
  always @(posedge clk) begin
    pre_rvalid <= pre_re;
    if (pre_re) pre_rdata <= cells[pre_raddr];
  end

  always @(posedge clk) begin
    if (rst_n && hog_we) begin
      real e;
      e = feat[hog_waddr];
      written[hog_waddr]++;
      checks++;
      if (fp2real(hog_wdata) - e > 1e-5 * e + 1e-9 || e - fp2real(hog_wdata) > 1e-5 * e + 1e-9) begin
        failures++;
        if (failures < 10) $display("FAIL feature %0d = %f expected %f", hog_waddr, fp2real(hog_wdata), e);
      end
    end
  end

  initial begin
    real s;
    for (int c = 0; c < ncells; c++)
      for (int k = 0; k < nbin; k++)
        cells[c][k] = real2fp(real'($urandom_range(500000)) / 100.0);
    for (int b = 0; b < 105; b++) begin
      int by, bx, cidx;
      by = b / 7; bx = b % 7;
      s = 0.0;
      for (int i = 0; i < 36; i++) begin
        cidx = (by + (i / 9) / 2) * NCX + bx + (i / 9) % 2;
        s = s + fp2real(cells[cidx][i % 9]) ** 2;
      end
      for (int i = 0; i < 36; i++) begin
        cidx = (by + (i / 9) / 2) * NCX + bx + (i / 9) % 2;
        feat[b * 36 + i] = fp2real(cells[cidx][i % 9]) / $sqrt(s + 0.01);
      end
    end
    for (int i = 0; i < nf; i++) written[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1; t0 = cyc;
    @(negedge clk);
    start = 0;
    wait (done);
    @(negedge clk);
    checks++;
    if (cyc - t0 < 105 * 84 - 2 || cyc - t0 > 105 * 84 + 2) begin
      failures++; $display("FAIL took %0d clocks", cyc - t0);
    end
    for (int i = 0; i < nf; i++) begin
      checks++;
      if (written[i] != 1) begin
        failures++;
        if (failures < 20) $display("FAIL feature %0d written %0d times", i, written[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
