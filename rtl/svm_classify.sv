// svm_classify: the "SVM_CLASSIFY" block, the linear SVM decision of eqs.
// (6)-(7): D = W.X + b, Result = 1 (person) when D > 0, else 0.
//
// It takes, one clock after each ADDR_FOR_SVM beat, the feature
// (hog_value) and the weight or bias (trained_value) read from the two
// memories.  The bias beat loads the sum; each feature beat multiplies
// (registered product), and the next clock adds the product to the sum, all
// in IEEE 754 single precision as in the paper's simulation (its waveform
// shows sum and prod).  Two clocks after the last feature beat, result and
// done are set; sum holds D.  D = 0, which the paper leaves "on the
// hyperplane", is reported as 0 (no person).  Pipeline depth and the
// handling of D = 0 are this design's choices.
module svm_classify
  import hd_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_bias,
  input  logic  in_last,
  input  fp32_t hog_value,
  input  fp32_t trained_value,
  output fp32_t sum,
  output logic  result,
  output logic  done
);

  fp32_t prod, prod_c, sum_c;
  logic  prod_v, prod_last;

  fp_mul u_mul (.a(hog_value), .b(trained_value), .y(prod_c));
  fp_add u_add (.a(sum), .b(prod), .sub(1'b0), .y(sum_c));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prod <= FP_ZERO; prod_v <= 1'b0; prod_last <= 1'b0;
      sum <= FP_ZERO; result <= 1'b0; done <= 1'b0;
    end else begin
      prod_v    <= in_valid && !in_bias;
      prod_last <= in_valid && !in_bias && in_last;
      if (in_valid && !in_bias) prod <= prod_c;
      done <= 1'b0;
      if (in_valid && in_bias) begin
        sum    <= trained_value;
        result <= 1'b0;
      end else if (prod_v) begin
        sum <= sum_c;
      end
      if (prod_v && prod_last) begin
        result <= !sum_c[31] && (sum_c[30:0] != 31'd0);
        done   <= 1'b1;
      end
    end
  end

endmodule
