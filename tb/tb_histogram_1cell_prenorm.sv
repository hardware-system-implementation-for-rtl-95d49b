// tb_histogram_1cell_prenorm: self-checking test of the one-cell HOG unit.
//
// Random 10x10 pixel windows (and a few structured ones: flat, horizontal
// ramp, vertical ramp) are streamed in, some cells back to back, some with
// gaps.  The expected 9 bins are built from eqs. (1)-(2) and the reference
// vote model (cordic_ref_pkg); windows with a pixel whose angle lies within
// 0.05 degree of a bin edge are redrawn so that the CORDIC's angle error
// cannot move a vote.  Each bin must agree within 0.3% + 0.01; the cell
// number must come back, and hist_valid must come 103 clocks after the
// cell's first pixel.
module tb_histogram_1cell_prenorm;
  import hd_pkg::*;
  import fp_ref_pkg::*;
  import cordic_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic pix_valid = 0, pix_first = 0;
  logic [7:0] pix = 0;
  logic [6:0] cell_in = 0;
  logic hist_valid;
  hist_t hist;
  logic [6:0] cell_out;
  int checks = 0, failures = 0;

  histogram_1cell_prenorm dut (.*);

  always #5 clk = ~clk;

  // expected results, queued in order
  real exp_bins [$][BINS];
  int  exp_cell [$];
  int  t_first [$];
  int  cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic make_window(input int kind, output logic [7:0] w [10][10]);
    int fx, fy, b;
    real m;
    bit near, bad;
    do begin
      bad = 0;
      for (int r = 0; r < n10; r++)
        for (int c = 0; c < n10; c++)
          case (kind)
            0: w[r][c] = 8'($urandom);
            1: w[r][c] = 8'd77;
            2: w[r][c] = 8'(c * 25);
            3: w[r][c] = 8'(250 - r * 25);
            default: w[r][c] = 8'((r * 7 + c * 13 + int'($urandom_range(40))) & 255);
          endcase
      for (int r = 1; r <= n8; r++)
        for (int c = 1; c <= n8; c++) begin
          fx = int'(w[r][c+1]) - int'(w[r][c-1]);
          fy = int'(w[r+1][c]) - int'(w[r-1][c]);
          vote(fx, fy, b, m, near);
          if (near) bad = 1;
        end
    end while (bad);
  endtask

  task automatic send_cell(input int kind, input int cellno, input int gap);
    logic [7:0] w [10][10];
    real e [BINS];
    int fx, fy, b;
    real m;
    bit near;
    make_window(kind, w);
    for (int k = 0; k < BINS; k++) e[k] = 0.0;
    for (int r = 1; r <= n8; r++)
      for (int c = 1; c <= n8; c++) begin
        fx = int'(w[r][c+1]) - int'(w[r][c-1]);
        fy = int'(w[r+1][c]) - int'(w[r-1][c]);
        vote(fx, fy, b, m, near);
        e[b] = e[b] + m;
      end
    exp_bins.push_back(e);
    exp_cell.push_back(cellno);
    for (int i = 0; i < n100; i++) begin
      @(negedge clk);
      pix_valid = 1; pix_first = (i == 0); pix = w[i / 10][i % 10];
      cell_in = 7'(cellno);
      if (i == 0) t_first.push_back(cyc);
    end
    @(negedge clk);
    pix_valid = 0; pix_first = 0;
    repeat (gap) @(negedge clk);
  endtask

  always @(posedge clk) begin
    if (rst_n && hist_valid) begin
      real e [BINS];
      real g;
      int  tf;
      e = exp_bins[0];
      exp_bins.pop_front();
      tf = t_first.pop_front();
      checks++;
      if (int'(cell_out) != exp_cell.pop_front()) begin
        failures++; $display("FAIL cell number %0d", cell_out);
      end
      checks++;
      if (cyc - tf != 103) begin
        failures++; $display("FAIL latency %0d", cyc - tf);
      end
      for (int k = 0; k < BINS; k++) begin
        g = fp2real(hist[k]);
        checks++;
        if (g - e[k] > 0.003 * e[k] + 0.01 || e[k] - g > 0.003 * e[k] + 0.01) begin
          failures++;
          if (failures < 20) $display("FAIL bin %0d got %f expected %f", k, g, e[k]);
        end
      end
    end
  end

  int n_cells = 43;  // loop bounds held in variables keep the loops rolled
  int n10 = 10, n8 = 8, n100 = 100;

  initial begin
    int kind;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < n_cells; i++) begin
      kind = (i < 3) ? i + 1 : ((i % 3 == 0) ? 4 : 0);
      send_cell(kind, i, (i % 2) * 8);
    end
    repeat (120) @(negedge clk);
    checks++;
    if (exp_bins.size() != 0) begin
      failures++; $display("FAIL %0d cells never came out", exp_bins.size());
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
