// fft_checker: self-checking driver for one fft instance, used by tb_fft and tb_ifft.
//
// After reset it sends three single tones (bins 5, 0 and M-1, amplitude 1/8) and six random
// vectors (components uniform in +-AMP LSB) through the transform and compares every output
// with a directly evaluated DFT in real arithmetic, scaled by 1/sqrt(M), within 2 LSB of the
// 8 fractional bits. It also checks out_last, the number of outputs and the latency from the
// last input sample to the first output sample, (M/2)*log2(M) + 1 clocks. The counts are
// outputs; done rises when all vectors have been checked.
module fft_checker #(
  parameter int M     = 64,
  parameter int IN_W  = 16,
  parameter int OUT_W = 10,
  parameter bit INV   = 1'b0,
  parameter int AMP   = 64
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);
  localparam int LM = $clog2(M);
  localparam real PI = 3.141592653589793;

  logic in_valid = 0, in_ready, out_valid, out_last;
  logic signed [IN_W-1:0] in_re = 0, in_im = 0;
  logic signed [OUT_W-1:0] out_re, out_im;
  fft #(.M(M), .IN_W(IN_W), .OUT_W(OUT_W), .INVERSE(INV)) dut (.*);

  real xr [M], xi [M];
  task automatic run_vec(int kind);
    real er, ei, ang, sgn, gr, gi;
    int lat, k;
    sgn = INV ? 1.0 : -1.0;
    for (int n = 0; n < M; n++) begin
      if (kind < 0) begin
        xr[n] = real'(int'($urandom_range(2 * AMP)) - AMP) / 256.0;
        xi[n] = real'(int'($urandom_range(2 * AMP)) - AMP) / 256.0;
      end else begin
        xr[n] = $floor(256.0 * 0.125 * $cos(2.0 * PI * kind * n / M)) / 256.0;
        xi[n] = $floor(256.0 * 0.125 * $sin(2.0 * PI * kind * n / M)) / 256.0;
      end
    end
    wait (in_ready);
    for (int n = 0; n < M; n++) begin
      @(negedge clk);
      in_valid = 1;
      in_re = IN_W'($rtoi(xr[n] * 256.0));
      in_im = IN_W'($rtoi(xi[n] * 256.0));
    end
    @(negedge clk);
    in_valid = 0;
    lat = 1;
    while (!out_valid) begin @(negedge clk); lat++; end
    checks++;
    if (lat != (M / 2) * LM + 1) begin failures++; $display("M=%0d latency %0d", M, lat); end
    k = 0;
    while (out_valid) begin
      er = 0; ei = 0;
      for (int n = 0; n < M; n++) begin
        ang = sgn * 2.0 * PI * real'(k * n) / real'(M);
        gr = $cos(ang); gi = $sin(ang);
        er += xr[n] * gr - xi[n] * gi;
        ei += xr[n] * gi + xi[n] * gr;
      end
      er /= $sqrt(real'(M)); ei /= $sqrt(real'(M));
      checks++;
      if ((real'(out_re) / 256.0 - er) > 2.0 / 256.0 || (er - real'(out_re) / 256.0) > 2.0 / 256.0 ||
          (real'(out_im) / 256.0 - ei) > 2.0 / 256.0 || (ei - real'(out_im) / 256.0) > 2.0 / 256.0) begin
        failures++;
        $display("M=%0d k=%0d got %f %f exp %f %f", M, k, real'(out_re) / 256.0,
                 real'(out_im) / 256.0, er, ei);
      end
      checks++;
      if (out_last != (k == M - 1)) failures++;
      k++;
      @(negedge clk);
    end
    checks++;
    if (k != M) begin failures++; $display("M=%0d count %0d", M, k); end
  endtask

  initial begin
    checks = 0; failures = 0; done = 0;
    wait (rst_n);
    @(negedge clk);
    run_vec(5);
    run_vec(0);
    run_vec(M - 1);
    for (int i = 0; i < 6; i++) run_vec(-1);
    done = 1;
  end
endmodule
