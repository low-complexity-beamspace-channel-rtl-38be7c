// tb_ifft: checks the inverse transform (INVERSE = 1), 12-bit Q4.8 in, 16-bit Q8.8 out,
// at the default size M = 64 and at M = 128, where log2(M) is odd and the output multiplier
// by 1/sqrt(2) completes the unitary scaling. Each size is driven by an fft_checker: tones and
// random vectors against a direct DFT scaled by 1/sqrt(M) within 2 LSB, out_last, and the
// latency (M/2)*log2(M) + 1 from the last input to the first output.
module tb_ifft;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int c64, f64, c128, f128;
  logic d64, d128;

  fft_checker #(.M(64), .IN_W(12), .OUT_W(16), .INV(1'b1), .AMP(120)) u64 (
    .clk, .rst_n, .checks(c64), .failures(f64), .done(d64));
  fft_checker #(.M(128), .IN_W(12), .OUT_W(16), .INV(1'b1), .AMP(120)) u128 (
    .clk, .rst_n, .checks(c128), .failures(f128), .done(d128));

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c64 + c128, f64 + f128 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (d64 && d128);
    $display("TB_RESULT checks=%0d failures=%0d", c64 + c128, f64 + f128);
    $finish;
  end
endmodule
