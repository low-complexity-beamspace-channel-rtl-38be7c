// tb_threshold_calc: random (SDNR, qM, D0) triples against the threshold evaluated in real
// arithmetic,
//   eta = D0 (1 + qM/(M SDNR)) (ln((1 + M SDNR/qM) C) + ln(M - qM) - ln qM),  C = 4, M = 64,
// clipped at zero; tolerance 1.5 % + 4 LSB plus 0.004 on the sum of logarithms, which is the
// accuracy of the 8-segment piecewise-linear logarithm.
// SDNR = 0 must give the largest threshold. Also checks the start-to-done latency.
module tb_threshold_calc;
  localparam int M = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, done;
  logic [23:0] sdnr = 0, eta;
  logic [6:0] qm = 0;
  logic [15:0] d0 = 0;
  threshold_calc #(.M(M)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int s, int q, int d);
    real sr, dr, e, got, err;
    int lat;
    @(negedge clk);
    sdnr = 24'(s); qm = 7'(q); d0 = 16'(d); start = 1;
    @(negedge clk);
    start = 0; lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    sr = real'(s) / 256.0;
    dr = real'(d) / 256.0;
    got = real'(eta) / 256.0;
    checks++;
    if (s == 0) begin
      if (eta != '1) begin failures++; $display("sdnr=0 eta=%0d", eta); end
    end else begin
      e = dr * (1.0 + q / (M * sr)) * ($ln((1.0 + M * sr / q) * 4.0) + $ln(real'(M - q)) - $ln(real'(q)));
      if (e < 0) e = 0;
      if (e > 65535.99) e = 65535.99;
      err = got - e;
      if (err < 0) err = -err;
      // the logarithm terms cancel partly, so allow 0.004 absolute on their sum as well
      if (err > 0.015 * e + 0.004 * dr * (1.0 + q / (M * sr)) + 4.0 / 256.0) begin
        failures++;
        $display("s=%f q=%0d d=%f eta=%f exp=%f", sr, q, dr, got, e);
      end
      checks++;
      if (lat != 30) begin failures++; $display("latency %0d", lat); end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, 4, 256);
    run(256 * 10, 3, 256);
    run(256, 1, 512);
    run(1, 63, 100);
    run(24'hFFFFFF, 1, 65535);
    for (int i = 0; i < 300; i++)
      run($urandom_range(1 << ($urandom_range(23) + 1)) + 1, $urandom_range(M - 2) + 1,
          $urandom_range(4000) + 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
