// image_mem: the "Image MEM" of the detector, the 8-bit grayscale input
// window (IMG_H x IMG_W = 130 x 66 pixels by default, the paper's size),
// stored row by row at address row*IMG_W + col.
//
// One write port, through which the host loads the image, and one read port
// with a registered output: rdata and rvalid follow re/raddr by one clock.
// The paper names the memory and its contents; the single-cycle synchronous
// read and the load port are this design's choice.
module image_mem #(
  parameter int unsigned IMG_H = 130,
  parameter int unsigned IMG_W = 66,
  localparam int unsigned DEPTH = IMG_H * IMG_W,
  localparam int unsigned ADDR_W    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [7:0]    wdata,
  input  logic          re,
  input  logic [ADDR_W-1:0] raddr,
  output logic [7:0]    rdata,
  output logic          rvalid
);

  logic [7:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
    rvalid <= re;
  end

endmodule
