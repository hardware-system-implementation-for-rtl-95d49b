// tb_addr_for_svm: self-checking test of the SVM address generator, with
// the default 3780 features and STEP = 4.
//
// After start, beats must come exactly every 4 clocks: first the bias at
// address 3780 (is_bias), then addresses 0..3779 in order, is_last only on
// the final one; busy must then drop.  The run is repeated once.
module tb_addr_for_svm;
  import hd_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic beat, is_bias, is_last, busy;
  logic [11:0] addr;
  int checks = 0, failures = 0;
  int n = 0, cyc = 0, t0 = 0;

  addr_for_svm dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (rst_n && beat) begin
      int ea;
      ea = (n == 0) ? 3780 : n - 1;
      checks++;
      if (int'(addr) != ea || is_bias != (n == 0) || is_last != (n == 3780) || cyc != t0 + 4 * n) begin
        failures++;
        if (failures < 10) $display("FAIL beat %0d addr %0d bias %0d last %0d t %0d", n, addr, is_bias, is_last, cyc - t0);
      end
      n++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      @(negedge clk);
      start = 1; n = 0; t0 = cyc + 1;
      @(negedge clk);
      start = 0;
      wait (!busy);
      repeat (5) @(negedge clk);
      checks++;
      if (n != 3781) begin failures++; $display("FAIL %0d beats", n); end
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
