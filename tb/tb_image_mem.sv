// tb_image_mem: self-checking test of image_mem.
//
// Writes a pseudo-random value to every address, then reads all addresses
// back in a scrambled order and checks that the data come out exactly one
// clock after the read request, with rvalid marking them.  A write
// to one address must not disturb the others (second pass rewrites half of
// the addresses and rechecks everything).
module tb_image_mem;
  import hd_pkg::*;

  localparam int DEPTH = 130 * 66;
  localparam int AWD   = $clog2(DEPTH);
  typedef logic [7:0] word_t;

  logic clk = 0;
  logic we = 0, re = 0;
  logic [AWD-1:0] waddr = 0, raddr = 0;
  word_t wdata, rdata;
  logic rvalid;
  word_t model [DEPTH];
  int checks = 0, failures = 0;
  int depth = DEPTH;

  image_mem  dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata, .rvalid);

  always #5 clk = ~clk;

  function automatic word_t rnd_word();
    word_t w;
    for (int i = 0; i < $bits(word_t); i += 32) w = (w << 32) | word_t'($urandom);
    return w;
  endfunction

  initial begin
    int a;
    for (int pass = 0; pass < 2; pass++) begin
      for (int i = 0; i < depth; i++) begin
        if (pass == 1 && (i % 2) == 0) continue;
        @(negedge clk);
        we = 1; waddr = AWD'(i); wdata = rnd_word(); model[i] = wdata;
      end
      @(negedge clk);
      we = 0;
      for (int i = 0; i < depth; i++) begin
        a = (i * 37 + 11) % depth;
        @(negedge clk);
        re = 1; raddr = AWD'(a);
        @(negedge clk);
        re = 0;
        checks++;
        if (rdata !== model[a] || rvalid !== 1'b1) begin
          failures++;
          if (failures < 10) $display("FAIL addr %0d", a);
        end
        @(negedge clk); checks++; if (rvalid !== 1'b0) begin failures++; $display("FAIL rvalid stuck"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
