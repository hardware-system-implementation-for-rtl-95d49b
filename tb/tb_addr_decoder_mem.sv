// tb_addr_decoder_mem: self-checking test of the cell address generator at
// the full 130 x 66 size.
//
// After a rising edge of iEn it must produce, for each of the 128 cells in
// row order, the 100 addresses of the cell's 10x10 window, first marking
// the first one, with the cell number, one new cell every 108 clocks, and
// then one done pulse.  A second run checks that holding iEn high does not
// restart the decoder, and a new rising edge does.
module tb_addr_decoder_mem;
  import hd_pkg::*;

  logic clk = 0, rst_n = 0, iEn = 0;
  logic [13:0] addr;
  logic addr_valid, first, busy, done;
  logic [6:0] cell_idx;
  int checks = 0, failures = 0;
  int n = 0, n_done = 0, cyc = 0, t_start = 0;

  addr_decoder_mem dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // expected address of output number k
  always @(posedge clk) begin
    if (rst_n && addr_valid) begin
      int cellno, p, r, c, ea, et;
      cellno = n / 100; p = n % 100; r = p / 10; c = p % 10;
      ea = ((cellno / 8) * 8 + r) * 66 + (cellno % 8) * 8 + c;
      et = t_start + cellno * 108 + p;
      checks++;
      if (int'(addr) != ea || int'(cell_idx) != cellno || first != (p == 0) || cyc != et) begin
        failures++;
        if (failures < 10)
          $display("FAIL #%0d addr %0d (exp %0d) cell %0d first %0d t %0d (exp %0d)",
                   n, addr, ea, cell_idx, first, cyc, et);
      end
      n++;
    end
    if (rst_n && done) begin
      n_done++;
      checks++;
      if (n != 12800 * n_done || cyc != t_start + 128 * 108) begin
        failures++;
        $display("FAIL done after %0d addresses at %0d", n, cyc - t_start);
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    iEn = 1; t_start = cyc + 1;
    wait (done);
    @(negedge clk);
    repeat (20) @(negedge clk);  // iEn still high: no restart
    checks++;
    if (busy) begin failures++; $display("FAIL restarted without an iEn edge"); end
    iEn = 0;
    @(negedge clk);
    n = 0; n_done = 0;
    iEn = 1; t_start = cyc + 1;
    @(negedge clk);
    iEn = 0;
    wait (done);
    repeat (3) @(negedge clk);
    checks++;
    if (n_done != 1) begin failures++; $display("FAIL second run"); end
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
