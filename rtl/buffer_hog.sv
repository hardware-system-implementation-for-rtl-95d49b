// buffer_hog: the "BUFFER_HOG" memory (drawn as MEM_HOG_PRENORM in the
// system diagram), holding the normalized HOG descriptor: 3780 single-
// precision features by default (15 x 7 blocks x 36), feature k of block b at
// address b*36 + k.
//
// The normalization writes one feature per cycle; the SVM reads through a
// port with a registered output (rdata and rvalid one clock after re).  The
// paper gives the buffer's role and size; the ports are this design's choice.
module buffer_hog
  import hd_pkg::*;
#(
  parameter int unsigned N_FEAT = 3780,
  localparam int unsigned ADDR_W    = $clog2(N_FEAT)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [ADDR_W-1:0] waddr,
  input  fp32_t         wdata,
  input  logic          re,
  input  logic [ADDR_W-1:0] raddr,
  output fp32_t         rdata,
  output logic          rvalid
);

  fp32_t mem [N_FEAT];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
    rvalid <= re;
  end

endmodule
