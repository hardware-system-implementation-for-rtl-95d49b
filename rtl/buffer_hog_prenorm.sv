// buffer_hog_prenorm: the "BUFFER_HOG_PRENORM" memory, holding the
// un-normalized 9-bin histogram of every cell (16 x 8 = 128 cells by default).
//
// One word is one whole cell histogram (9 single-precision values), written
// in one cycle when the histogram unit finishes a cell, so the next cell can
// start at once; the normalization reads one cell per cycle.  Address =
// cell_row * N_CELLS_X + cell_col.  Read data and rvalid are registered (one
// clock after re).  The paper gives the buffer's role; its word layout is
// this design's choice.
module buffer_hog_prenorm
  import hd_pkg::*;
#(
  parameter int unsigned N_CELLS = 128,
  localparam int unsigned ADDR_W     = $clog2(N_CELLS)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [ADDR_W-1:0] waddr,
  input  hist_t         wdata,
  input  logic          re,
  input  logic [ADDR_W-1:0] raddr,
  output hist_t         rdata,
  output logic          rvalid
);

  hist_t mem [N_CELLS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
    rvalid <= re;
  end

endmodule
