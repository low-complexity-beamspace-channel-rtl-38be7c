// tb_sorting_unit: streams random vectors (with repeated values and extremes) into the
// M = 64 sorter and checks that the M outputs are the inputs in descending order, that
// out_last marks the last, and that the first output comes 2M-1 clocks after the first input
// (M load clocks plus the M-1 flush clocks).
module tb_sorting_unit;
  localparam int M = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, out_valid, out_last;
  logic [15:0] in_data = 0, out_data;
  sorting_unit #(.M(M)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int vals[$];
  task automatic run_vec(int kind);
    int lat, k;
    vals = {};
    for (int i = 0; i < M; i++) begin
      case (kind)
        0: vals.push_back($urandom_range(65535));
        1: vals.push_back($urandom_range(7));             // many repeats
        2: vals.push_back(i);                            // ascending
        3: vals.push_back(M - i);                        // descending
        default: vals.push_back((i % 5 == 0) ? 65535 : $urandom_range(300));
      endcase
    end
    wait (in_ready);
    @(negedge clk);
    for (int i = 0; i < M; i++) begin
      in_valid = 1; in_data = 16'(vals[i]);
      @(negedge clk);
    end
    in_valid = 0;
    lat = M;
    while (!out_valid) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 2 * M - 1) begin failures++; $display("latency %0d", lat); end
    vals.rsort();
    k = 0;
    while (out_valid) begin
      checks++;
      if (out_data != 16'(vals[k]) || out_last != (k == M - 1)) begin
        failures++;
        $display("k=%0d got %0d exp %0d", k, out_data, vals[k]);
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
    for (int v = 0; v < 12; v++) run_vec(v % 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
