// addr_decoder_mem: the "ADDR_DECODER_MEM" block, which walks the input
// window cell by cell and produces the Image MEM address of every pixel a
// cell's histogram needs.
//
// A run starts on a rising edge of iEn (the paper: extraction begins when
// iEn is set to 1).  Cells are taken row by row, N_CELLS_X per row.  For the
// cell at (cy, cx) the block issues, one per clock, the 10x10 pixels of the
// 8x8 cell plus its one-pixel border, rows top to bottom and columns left to
// right: address (8*cy + r)*IMG_W + 8*cx + c, r, c = 0..9.  That takes 100
// cycles; the block then idles so that a new cell starts every CELL_CYCLES =
// 108 cycles, the rate the paper gives ("each cell is extracted in 108
// cycles").  Reading the border with each cell, rather than sharing rows
// between cells, is this design's reading of how 108 cycles per cell arise.
// With addr_valid it gives first (first pixel of a cell) and cell_idx (cell
// number, cy*N_CELLS_X + cx).  done pulses for one clock when the period of
// the last cell has ended; busy is high during the run.
module addr_decoder_mem
  import hd_pkg::*;
#(
  parameter int unsigned IMG_H       = 130,
  parameter int unsigned IMG_W       = 66,
  parameter int unsigned CELL_CYCLES = 108,
  localparam int unsigned N_CELLS_Y  = (IMG_H - 2) / CELL,
  localparam int unsigned N_CELLS_X  = (IMG_W - 2) / CELL,
  localparam int unsigned ADDR_W     = $clog2(IMG_H * IMG_W),
  localparam int unsigned CELL_W     = $clog2(N_CELLS_Y * N_CELLS_X)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              iEn,
  output logic [ADDR_W-1:0] addr,
  output logic              addr_valid,
  output logic              first,
  output logic [CELL_W-1:0] cell_idx,
  output logic              busy,
  output logic              done
);

  logic       en_d;
  logic [$clog2(CELL_CYCLES)-1:0] tick;
  logic [3:0] r, c;
  logic [$clog2(N_CELLS_Y)-1:0] cy;
  logic [$clog2(N_CELLS_X)-1:0] cx;
  logic       last_cell;

  assign last_cell = (32'(cy) == N_CELLS_Y - 1) && (32'(cx) == N_CELLS_X - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en_d <= 1'b0; busy <= 1'b0; done <= 1'b0;
      tick <= '0; r <= '0; c <= '0; cy <= '0; cx <= '0;
    end else begin
      en_d <= iEn;
      done <= 1'b0;
      if (!busy) begin
        if (iEn && !en_d) begin
          busy <= 1'b1;
          tick <= '0; r <= '0; c <= '0; cy <= '0; cx <= '0;
        end
      end else begin
        // pixel position inside the 10x10 window
        if (addr_valid) begin
          if (c == 4'(WIN - 1)) begin
            c <= '0;
            r <= r + 4'd1;
          end else begin
            c <= c + 4'd1;
          end
        end
        if (tick == $bits(tick)'(CELL_CYCLES - 1)) begin
          tick <= '0; r <= '0; c <= '0;
          if (last_cell) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else if (cx == $bits(cx)'(N_CELLS_X - 1)) begin
            cx <= '0;
            cy <= cy + 1'b1;
          end else begin
            cx <= cx + 1'b1;
          end
        end else begin
          tick <= tick + 1'b1;
        end
      end
    end
  end

  always_comb begin
    addr_valid = busy && (tick < $bits(tick)'(WIN * WIN));
    first      = addr_valid && (tick == '0);
    addr       = ADDR_W'((32'(cy) * CELL + 32'(r)) * IMG_W + 32'(cx) * CELL + 32'(c));
    cell_idx       = CELL_W'(32'(cy) * N_CELLS_X + 32'(cx));
  end

endmodule
