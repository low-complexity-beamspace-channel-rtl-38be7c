// tb_sdnr_est: SDNR = P/D0 in Q16.8 against the real-valued ratio, saturation at D0 = 0, and
// the latency of 25 clocks.
module tb_sdnr_est;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, done;
  logic [15:0] ph = 0, d0 = 0;
  logic [23:0] sdnr;
  sdnr_est dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int p, d, lat;
    real r, e;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      p = $urandom_range(65535);
      d = (i == 0) ? 0 : (i % 3 == 0) ? $urandom_range(255) + 1 : $urandom_range(65535) + 1;
      if (d > 65535) d = 65535;
      @(negedge clk);
      ph = 16'(p); d0 = 16'(d); start = 1;
      @(negedge clk);
      start = 0; lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      r = real'(sdnr) / 256.0;
      e = (d == 0) ? 65535.99609375 : real'(p) / real'(d);
      if (e > 65535.99609375) e = 65535.99609375;
      checks++;
      if (r > e + 1e-9 || r < e - 1.0 / 256.0) begin
        failures++;
        $display("p=%0d d=%0d sdnr=%f exp=%f", p, d, r, e);
      end
      if (d != 0 && real'(p) / real'(d) < 65535.0) begin
        checks++;
        if (lat != 25) begin failures++; $display("latency %0d", lat); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
