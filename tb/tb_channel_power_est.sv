// tb_channel_power_est: P = max(avg - D0, 0) on random and equal operands, one-clock latency.
module tb_channel_power_est;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, valid;
  logic [15:0] avg_pwr = 0, d0 = 0, ph;
  channel_power_est dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a, d, e;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      a = $urandom_range(65535);
      d = (i % 4 == 0) ? a : $urandom_range(65535);
      @(negedge clk);
      avg_pwr = 16'(a); d0 = 16'(d); start = 1;
      @(negedge clk);
      start = 0;
      e = (a > d) ? a - d : 0;
      checks++;
      if (!valid || ph != 16'(e)) begin
        failures++;
        $display("avg=%0d d0=%0d ph=%0d exp=%0d", a, d, ph, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
