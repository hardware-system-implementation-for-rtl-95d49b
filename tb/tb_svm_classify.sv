// tb_svm_classify: self-checking test of the SVM decision unit.
//
// Streams vectors of random features and weights (beats 4 clocks apart, as
// ADDR_FOR_SVM issues them, and also back to back) with a bias chosen so
// that D = W.X + b is clearly positive or clearly negative, and a case with
// D exactly 0.  D is checked against a double-precision dot product
// (0.1% of sum |w x| + 1e-4), result must be 1 exactly when D > 0, and done
// must come two clocks after the last beat.
module tb_svm_classify;
  import hd_pkg::*;
  import fp_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_bias = 0, in_last = 0;
  fp32_t hog_value = 0, trained_value = 0, sum;
  logic result, done;
  int checks = 0, failures = 0;
  int cyc = 0, t_last = 0;
  int n_feat = 500, n_vec = 12;

  svm_classify dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    real x [500], w [500];
    real dot, absd, b, dexp;
    int gap;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < n_vec; v++) begin
      gap = (v % 2 == 0) ? 3 : 0;
      dot = 0.0; absd = 0.0;
      for (int i = 0; i < n_feat; i++) begin
        x[i] = fp2real(real2fp(real'($urandom_range(1000)) / 1000.0));
        w[i] = fp2real(real2fp((real'($urandom_range(2000)) - 1000.0) / 1000.0));
        if (v == n_vec - 1) w[i] = 0.0;   // D = b = 0
        dot = dot + x[i] * w[i];
        absd = absd + ((x[i] * w[i] < 0) ? -x[i] * w[i] : x[i] * w[i]);
      end
      b = (v == n_vec - 1) ? 0.0 : ((v % 3 == 0) ? -dot - 2.0 : -dot + 2.0);
      dexp = dot + b;
      @(negedge clk);
      in_valid = 1; in_bias = 1; in_last = 0; trained_value = real2fp(b);
      for (int i = 0; i < n_feat; i++) begin
        @(negedge clk);
        in_valid = 0;
        repeat (gap) @(negedge clk);
        in_valid = 1; in_bias = 0; in_last = (i == n_feat - 1);
        hog_value = real2fp(x[i]); trained_value = real2fp(w[i]);
        if (i == n_feat - 1) t_last = cyc;
      end
      @(negedge clk);
      in_valid = 0; in_last = 0;
      wait (done);
      checks += 3;
      if (cyc - t_last != 2) begin failures++; $display("FAIL done latency %0d", cyc - t_last); end
      if (fp2real(sum) - dexp > 0.001 * absd + 1e-4 || dexp - fp2real(sum) > 0.001 * absd + 1e-4) begin
        failures++; $display("FAIL D %f expected %f", fp2real(sum), dexp);
      end
      if (result !== (dexp > 0.5)) begin
        failures++; $display("FAIL result %0d for D %f", result, dexp);
      end
      @(negedge clk);
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
