// block_normalization_core: L2 normalization of one HOG block, eq. (5):
//   v_i' = v_i / sqrt(sum_j v_j^2 + eps^2),  i = 1..36 (4 cells x 9 bins).
//
// Schedule, counted in clocks from the start pulse (cycle 0):
//   1..4    the four cell histograms arrive (in_valid), 9 values each;
//   5..40   sum of squares, one multiply-add per clock;
//   41      + eps^2;
//   42      seed of 1/sqrt(s) (exponent-halving bit trick);
//   43..46  four Newton-Raphson steps y <- y * (1.5 - 0.5*s*y*y);
//   47      norm_ready: the block's scale factor 1/sqrt(s) is known,
//           which matches the paper's "normalization after 47 clock cycles";
//   47..82  out_valid: v_i * (1/sqrt(s)) for i = 0..35, one per clock;
//   83      done.
// All arithmetic is IEEE 754 single precision (fp_add, fp_mul).
// The paper says the core uses Newton-Raphson to approximate the square
// root; here Newton-Raphson approximates its reciprocal, which needs no
// divider and turns the 36 divisions into multiplications.  The value of
// eps (0.1), the seed, the number of iterations and the schedule are this
// design's choices.  Inputs must arrive while busy; a start while busy is
// ignored.
module block_normalization_core
  import hd_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  logic  in_valid,
  input  hist_t in_cell,
  output logic  busy,
  output logic  norm_ready,
  output fp32_t rnorm,
  output logic  out_valid,
  output logic [5:0] out_idx,
  output fp32_t out_data,
  output logic  done
);

  typedef enum logic [2:0] {IDLE, LOAD, SUMSQ, EPS, SEED, NR, OUT} state_t;
  state_t state;

  fp32_t      v [BLOCK_ELEMS];
  logic [5:0] idx;
  logic [2:0] beat;
  fp32_t      acc, y, half_s;
  fp32_t      sq, acc_next, m_out;
  fp32_t      yy, hyy, corr, y_next;

  // sum of squares and the "+ eps^2" step share one adder
  fp_mul u_sq   (.a(v[idx]), .b(v[idx]), .y(sq));
  fp_add u_acc  (.a(acc), .b(state == EPS ? FP_EPS_SQ : sq), .sub(1'b0), .y(acc_next));
  // one Newton-Raphson step for 1/sqrt(s)
  fp_mul u_yy   (.a(y), .b(y), .y(yy));
  fp_mul u_hyy  (.a(half_s), .b(yy), .y(hyy));
  fp_add u_corr (.a(FP_THREEHALF), .b(hyy), .sub(1'b1), .y(corr));
  fp_mul u_ynew (.a(y), .b(corr), .y(y_next));
  // output scaling
  fp_mul u_out  (.a(v[idx]), .b(y), .y(m_out));

  always_ff @(posedge clk) begin
    if (in_valid && state == LOAD)
      for (int k = 0; k < BINS; k++) v[32'(beat) * BINS + k] <= in_cell[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; idx <= '0; beat <= '0;
      acc <= FP_ZERO; y <= FP_ZERO; half_s <= FP_ZERO;
      norm_ready <= 1'b0; done <= 1'b0;
    end else begin
      norm_ready <= 1'b0;
      done       <= 1'b0;
      case (state)
        IDLE: if (start) begin
          state <= LOAD; beat <= '0; idx <= '0; acc <= FP_ZERO;
        end
        LOAD: if (in_valid) begin
          beat <= beat + 3'd1;
          if (beat == 3'd3) state <= SUMSQ;
        end
        SUMSQ: begin
          acc <= acc_next;
          idx <= idx + 6'd1;
          if (idx == 6'(BLOCK_ELEMS - 1)) state <= EPS;
        end
        EPS: begin
          acc   <= acc_next;
          state <= SEED;
        end
        SEED: begin
          y      <= RSQRT_MAGIC - {1'b0, acc[31:1]};
          half_s <= {acc[31], acc[30:23] - 8'd1, acc[22:0]};
          idx    <= '0;
          state  <= NR;
        end
        NR: begin
          y   <= y_next;
          idx <= idx + 6'd1;
          if (idx == 6'd3) begin
            idx        <= '0;
            norm_ready <= 1'b1;
            state      <= OUT;
          end
        end
        OUT: begin
          idx <= idx + 6'd1;
          if (idx == 6'(BLOCK_ELEMS - 1)) begin
            state <= IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  assign busy      = (state != IDLE);
  assign rnorm     = y;
  assign out_valid = (state == OUT);
  assign out_idx   = idx;
  assign out_data  = m_out;

endmodule
