// tb_activity_est: streams M = 64 squared magnitudes, then starts the estimator with D0 and
// P, and compares qM with the moment-matching formula evaluated in real arithmetic,
//   qM = round(2 M^2 P^2 / (sum|h'|^4 - 2 M D0^2 - 4 M D0 P)), clipped to 1..M-1,
// (M-1 when the denominator is not positive). Vectors: exponential noise plus K strong beams
// for several K, and flat vectors that make the denominator negative. Also checks the
// latency of log2(M)+8 clocks from start to done.
module tb_activity_est;
  localparam int M = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_clip = 0;
  int KS [6] = '{0, 1, 2, 4, 8, 16};

  logic sq_valid = 0, start = 0, done, den_clip;
  logic [15:0] sq = 0, d0 = 0, ph = 0;
  logic [6:0] qm;
  activity_est #(.M(M)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_vec(int k_act, bit flat);
    int v [M];
    real s2, s4, dd, pp, den, q;
    int exp_q, lat;
    s2 = 0; s4 = 0;
    for (int i = 0; i < M; i++) begin
      real u;
      u = (real'($urandom_range(1000000)) + 0.5) / 1000001.0;
      if (flat) v[i] = 400;
      else if (i < k_act) v[i] = 2000 + $urandom_range(6000);
      else v[i] = int'(-$ln(u) * 100.0);
      s2 += v[i];
      s4 += real'(v[i]) * real'(v[i]);
    end
    dd = flat ? 300.0 : 100.0;
    pp = s2 / M - dd;
    if (pp < 0) pp = 0;
    @(negedge clk);
    for (int i = 0; i < M; i++) begin
      sq_valid = 1; sq = 16'(v[i]);
      @(negedge clk);
    end
    sq_valid = 0;
    d0 = 16'(int'(dd)); ph = 16'(int'(pp)); pp = real'(int'(pp));
    start = 1;
    @(negedge clk);
    start = 0; lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    den = s4 - 2.0 * M * dd * dd - 4.0 * M * dd * pp;
    if (den <= 0) exp_q = M - 1;
    else begin
      q = 2.0 * M * M * pp * pp / den;
      exp_q = (q > M) ? M : int'($floor(q + 0.5));
      if (exp_q < 1) exp_q = 1;
      if (exp_q > M - 1) exp_q = M - 1;
    end
    checks++;
    if (int'(qm) != exp_q) begin
      failures++;
      $display("k=%0d flat=%0b qm=%0d exp=%0d", k_act, flat, qm, exp_q);
    end
    checks++;
    if (den_clip != (den <= 0)) begin failures++; $display("den_clip %0b", den_clip); end
    if (den_clip) n_clip++;
    if (den > 0) begin
      checks++;
      if (lat != 6 + 8) begin failures++; $display("latency %0d", lat); end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 6; r++)
      foreach (KS[k]) run_vec(KS[k], 1'b0);
    run_vec(0, 1'b1);
    checks++;
    if (n_clip == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
