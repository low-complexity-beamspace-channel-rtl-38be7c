// tb_elem_square: checks the squared magnitude, the aligned sample copy and the one-clock
// latency of elem_square against |z|^2 worked out in integer arithmetic.
module tb_elem_square;
  import bcd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_last = 0, out_valid, out_last;
  logic signed [BS_W-1:0] in_re = 0, in_im = 0, out_re, out_im;
  logic [SQ_W-1:0] out_sq;
  elem_square dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int re, im, exp_sq;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      if (i < 4) begin
        re = (i[0]) ? -512 : 511; im = (i[1]) ? -512 : 511;   // corners
      end else begin
        re = int'($urandom_range(1023)) - 512; im = int'($urandom_range(1023)) - 512;
      end
      in_valid = 1; in_re = BS_W'(re); in_im = BS_W'(im); in_last = (i == 499);
      @(negedge clk);
      in_valid = 0; in_last = 0;
      exp_sq = (re * re + im * im) / 256;
      checks++;
      if (!out_valid || out_sq != SQ_W'(exp_sq) || out_re != BS_W'(re) || out_im != BS_W'(im)
          || out_last != (i == 499)) begin
        failures++;
        $display("mismatch re=%0d im=%0d sq=%0d exp=%0d v=%0b", re, im, out_sq, exp_sq, out_valid);
      end
    end
    @(negedge clk);
    checks++;
    if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
