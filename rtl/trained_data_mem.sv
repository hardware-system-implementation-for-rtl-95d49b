// trained_data_mem: the "TrainedData MEM", the SVM hyperplane found offline
// by training: weights W[0..N_FEAT-1] at addresses 0..N_FEAT-1 (same order as
// the features in buffer_hog) and the bias b at address N_FEAT, all single
// precision.  N_FEAT = 3780 by default, the paper's descriptor length.
//
// The host loads it through the write port; the SVM reads through a port
// with a registered output (rdata one clock after re).  Placing b after the
// weights is this design's choice.
module trained_data_mem
  import hd_pkg::*;
#(
  parameter int unsigned N_FEAT = 3780,
  localparam int unsigned DEPTH = N_FEAT + 1,
  localparam int unsigned ADDR_W    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [ADDR_W-1:0] waddr,
  input  fp32_t         wdata,
  input  logic          re,
  input  logic [ADDR_W-1:0] raddr,
  output fp32_t         rdata
);

  fp32_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
