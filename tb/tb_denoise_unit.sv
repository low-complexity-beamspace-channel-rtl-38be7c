// tb_denoise_unit: loads M = 64 beamspace samples with their squared magnitudes, applies a
// threshold and checks every output: zero when |h'|^2 < eta, otherwise h' / alpha, with
// 1/alpha from the additive-quantization-noise table (b = 1..5 bits) computed here in real
// arithmetic; tolerance 1 LSB. Covers all ADC settings, eta = 0 (all kept), eta = max (none
// kept), out_last, and the timing: outputs on M consecutive clocks starting two clocks after
// start, M + 2 clocks in all.
module tb_denoise_unit;
  localparam int M = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, start = 0, busy, out_valid, out_keep, out_last;
  logic signed [9:0] in_re = 0, in_im = 0;
  logic [15:0] in_sq = 0;
  logic [23:0] eta = 0;
  logic [2:0] adc_bits = 3;
  logic signed [11:0] out_re, out_im;
  denoise_unit #(.M(M)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rho(int b);
    case (b)
      1: return 0.3634; 2: return 0.1175; 3: return 0.03454; 4: return 0.009497; 5: return 0.002499;
      default: return (b <= 0) ? 0.3634 : 2.7207 * (2.0 ** (-2 * b));
    endcase
  endfunction

  task automatic run_vec(int e, int b);
    int re [M], im [M], sqv [M];
    real ia, er, ei;
    int k, lat;
    for (int i = 0; i < M; i++) begin
      re[i] = int'($urandom_range(1023)) - 512;
      im[i] = int'($urandom_range(1023)) - 512;
      sqv[i] = (re[i] * re[i] + im[i] * im[i]) / 256;
    end
    @(negedge clk);
    for (int i = 0; i < M; i++) begin
      in_valid = 1; in_re = 10'(re[i]); in_im = 10'(im[i]); in_sq = 16'(sqv[i]);
      @(negedge clk);
    end
    in_valid = 0;
    eta = 24'(e); adc_bits = 3'(b); start = 1;
    @(negedge clk);
    start = 0; lat = 1;
    while (!out_valid) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 2) begin failures++; $display("latency %0d", lat); end
    ia = 1.0 / (1.0 - rho(b));
    k = 0;
    while (out_valid) begin
      bit kp;
      kp = sqv[k] >= e;
      er = kp ? re[k] * ia : 0.0;
      ei = kp ? im[k] * ia : 0.0;
      checks++;
      if (out_keep != kp || out_last != (k == M - 1) ||
          real'(out_re) > er + 1.0 || real'(out_re) < er - 1.0 ||
          real'(out_im) > ei + 1.0 || real'(out_im) < ei - 1.0) begin
        failures++;
        $display("k=%0d keep=%0b got %0d %0d exp %f %f", k, out_keep, out_re, out_im, er, ei);
      end
      k++;
      @(negedge clk);
    end
    checks++;
    if (k != M) failures++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_vec(0, 3);
    run_vec(24'hFFFFFF, 3);
    for (int b = 0; b < 8; b++) run_vec($urandom_range(1500), b);
    for (int i = 0; i < 6; i++) run_vec($urandom_range(2000), $urandom_range(1, 5));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
