// tb_seq_divider: random and corner-case divisions against integer floor division, with
// the saturation rule (zero divisor, quotient too wide) and the QW+1 clock latency.
module tb_seq_divider;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NW = 32, DW = 16, QW = 24;
  logic start = 0, busy, done;
  logic [NW-1:0] num = 0;
  logic [DW-1:0] den = 0;
  logic [QW-1:0] quo;
  seq_divider #(.NW(NW), .DW(DW), .QW(QW)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(longint unsigned n, longint unsigned d);
    longint unsigned exp_q;
    int lat;
    @(negedge clk);
    num = NW'(n); den = DW'(d); start = 1;
    @(negedge clk);
    start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    if (d == 0 || (n / d) >= (64'd1 << QW)) exp_q = (64'd1 << QW) - 1;
    else exp_q = n / d;
    checks++;
    if (quo != QW'(exp_q)) begin
      failures++;
      $display("div %0d/%0d = %0d exp %0d", n, d, quo, exp_q);
    end
    if (!(d == 0 || (n / d) >= (64'd1 << QW))) begin
      checks++;
      if (lat != QW + 1) begin failures++; $display("latency %0d", lat); end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, 1); run(100, 0); run(65535 * 256, 1); run(32'hFFFF_FFFF, 255); run(32'hFFFF_FFFF, 256);
    run(1000, 3); run(12345678, 65535);
    for (int i = 0; i < 300; i++) run($urandom, $urandom_range(65535));
    for (int i = 0; i < 300; i++) run($urandom_range(1 << 20), $urandom_range(255) + 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
