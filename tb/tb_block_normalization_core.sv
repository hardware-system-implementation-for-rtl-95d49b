// tb_block_normalization_core: self-checking test of the L2 block
// normalization, eq. (5) with eps^2 = 0.01.
//
// Random blocks (4 cells x 9 bins, values of the size cell histograms have:
// 0..2000, some blocks all zero, some with one non-zero value) are fed in
// on the four clocks after start.  Checked: norm_ready exactly 47 clocks
// after start (the paper's normalization time), the scale factor against
// 1/sqrt(sum v^2 + 0.01), the 36 outputs in order against v_i / sqrt(...)
// (relative error 1e-5), and done after the last output.
module tb_block_normalization_core;
  import hd_pkg::*;
  import fp_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, in_valid = 0;
  hist_t in_cell = '0;
  logic busy, norm_ready, out_valid, done;
  fp32_t rnorm, out_data;
  logic [5:0] out_idx;
  int checks = 0, failures = 0;
  int cyc = 0, t0 = 0, nout = 0, n_blocks = 30, n36 = 36;
  real v [36];
  real s, r_exp;

  block_normalization_core dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (rst_n && norm_ready) begin
      checks += 2;
      if (cyc - t0 != 47) begin failures++; $display("FAIL norm_ready after %0d clocks", cyc - t0); end
      if (fp2real(rnorm) - r_exp > 1e-5 * r_exp || r_exp - fp2real(rnorm) > 1e-5 * r_exp) begin
        failures++; $display("FAIL scale %e expected %e", fp2real(rnorm), r_exp);
      end
    end
    if (rst_n && out_valid) begin
      real e;
      e = v[nout] * r_exp;
      checks++;
      if (int'(out_idx) != nout || fp2real(out_data) - e > 1e-5 * e + 1e-9 || e - fp2real(out_data) > 1e-5 * e + 1e-9) begin
        failures++;
        if (failures < 10) $display("FAIL out %0d (idx %0d) %f expected %f", nout, out_idx, fp2real(out_data), e);
      end
      nout++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < n_blocks; b++) begin
      s = 0.0;
      for (int i = 0; i < n36; i++) begin
        v[i] = fp2real(real2fp(real'($urandom_range(2000000)) / 1000.0));
        if (b == 1 || (b == 2 && i != 7)) v[i] = 0.0;
        s = s + v[i] * v[i];
      end
      r_exp = 1.0 / $sqrt(s + fp2real(FP_EPS_SQ));
      nout = 0;
      @(negedge clk);
      start = 1; t0 = cyc;
      for (int q = 0; q < 4; q++) begin
        @(negedge clk);
        start = 0; in_valid = 1;
        for (int k = 0; k < BINS; k++) in_cell[k] = real2fp(v[q * 9 + k]);
      end
      @(negedge clk);
      in_valid = 0;
      wait (done);
      @(negedge clk);
      checks++;
      if (nout != 36 || cyc - t0 != 83) begin
        failures++; $display("FAIL %0d outputs, done after %0d", nout, cyc - t0);
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
