// addr_for_svm: the "ADDR_FOR_SVM" block, the address generator of the SVM
// dot product W.X + b.
//
// After start it issues one beat every STEP clocks: first the bias (address
// N_FEAT of the trained-data memory, is_bias = 1), then features 0 ..
// N_FEAT-1, whose address goes both to the feature buffer and to the
// trained-data memory; is_last marks the final feature.  STEP = 4 gives the
// SVM unit one clock each for the memory read, the multiply and the add,
// plus one spare, and makes the dot product (3781 beats) about 15100 clocks,
// in line with the paper's detection time (0.757 ms at 50 MHz overall).
// The paper names this block only; the sequence and STEP are this design's.
module addr_for_svm
  import hd_pkg::*;
#(
  parameter int unsigned N_FEAT = 3780,
  parameter int unsigned STEP   = 4,
  localparam int unsigned ADDR_W = $clog2(N_FEAT + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              beat,
  output logic [ADDR_W-1:0] addr,
  output logic              is_bias,
  output logic              is_last,
  output logic              busy
);

  logic [ADDR_W-1:0]         k;     // next feature
  logic [$clog2(STEP+1)-1:0] wait_cnt;
  logic                      bias_phase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; k <= '0; wait_cnt <= '0; bias_phase <= 1'b0;
    end else if (!busy) begin
      if (start) begin
        busy <= 1'b1; k <= '0; wait_cnt <= '0; bias_phase <= 1'b1;
      end
    end else begin
      if (wait_cnt == $bits(wait_cnt)'(STEP - 1)) wait_cnt <= '0;
      else wait_cnt <= wait_cnt + 1'b1;
      if (beat) begin
        if (bias_phase) bias_phase <= 1'b0;
        else if (32'(k) == N_FEAT - 1) busy <= 1'b0;
        else k <= k + 1'b1;
      end
    end
  end

  always_comb begin
    beat    = busy && (wait_cnt == '0);
    addr    = bias_phase ? ADDR_W'(N_FEAT) : k;
    is_bias = bias_phase;
    is_last = !bias_phase && (32'(k) == N_FEAT - 1);
  end

endmodule
