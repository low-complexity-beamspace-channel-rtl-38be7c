// tb_truncated_mean: feeds sorted vectors (largest first) to two truncated-mean units, one
// with the default RHO_MIN = M/8 and one with RHO_MIN = 48 so that the c' fallback is taken,
// and compares D0, the initial median estimate and ||h'||^2/M with a real-valued model of the
// blind composite-noise-power algorithm (median / ln 2 start, T = 3 truncated means with
// c = 2, c' = 4 and the 1/kappa bias correction). Tolerance: 4 % + 4 LSB for D0 (a sample
// next to the threshold may fall on either side), 1 % + 2 LSB for the start value, exact
// for the mean power. Vectors: exponential noise with a few strong beams.
module tb_truncated_mean;
  localparam int M = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_cp = 0;

  logic in_valid = 0;
  logic [15:0] in_data = 0;
  logic rdy_a, rdy_b, done_a, done_b, cp_a, cp_b;
  logic [15:0] d0_a, d0_b, di_a, di_b, avg_a, avg_b;
  truncated_mean #(.M(M)) dut_a (
    .clk, .rst_n, .in_valid, .in_data, .in_ready(rdy_a), .done(done_a),
    .d0(d0_a), .d0_init(di_a), .avg_pwr(avg_a), .used_cp(cp_a));
  truncated_mean #(.M(M), .RHO_MIN(48)) dut_b (
    .clk, .rst_n, .in_valid, .in_data, .in_ready(rdy_b), .done(done_b),
    .d0(d0_b), .d0_init(di_b), .avg_pwr(avg_b), .used_cp(cp_b));

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real kap(real k);
    return (1.0 - $exp(-k) * (1.0 + k)) / (1.0 - $exp(-k));
  endfunction

  // reference algorithm on ascending values v[0..M-1] (units of LSB)
  function automatic void model(input int v[$], input int rho, output real d_init, output real d,
                                output bit cp);
    real tau, s;
    int cnt;
    d_init = ((v[M/2-1] + v[M/2]) / 2) / $ln(2.0);
    d = d_init;
    cp = 0;
    for (int t = 0; t < 3; t++) begin
      tau = 2.0 * d; cnt = 0; s = 0;
      foreach (v[i]) if (v[i] <= tau) begin cnt++; s += v[i]; end
      cp = 0;
      if (cnt < rho) begin
        cp = 1; tau = 4.0 * d; cnt = 0; s = 0;
        foreach (v[i]) if (v[i] <= tau) begin cnt++; s += v[i]; end
      end
      if (cnt > 0) d = (s / cnt) / kap(cp ? 4.0 : 2.0);
    end
  endfunction

  function automatic bit close(real got, real exp_v, real rel, real abs_v);
    real e;
    e = got - exp_v;
    if (e < 0) e = -e;
    return e <= rel * exp_v + abs_v;
  endfunction

  int vals[$];
  task automatic run_vec(int kind);
    real di, da, db;
    bit cpa, cpb, fa, fb;
    longint sum;
    vals = {};
    for (int i = 0; i < M; i++) begin
      real u;
      u = (real'($urandom_range(1000000)) + 0.5) / 1000001.0;
      case (kind)
        0: vals.push_back(int'(-$ln(u) * 300.0));                              // noise only
        1: vals.push_back((i < 4) ? 9000 + $urandom_range(3000) : int'(-$ln(u) * 200.0));
        2: vals.push_back((i < 40) ? 100 + $urandom_range(100)                 // fallback case
                           : (i < 48) ? 500 + $urandom_range(50) : 5000);
        default: vals.push_back((i < 10) ? 20000 + $urandom_range(20000) : int'(-$ln(u) * 50.0));
      endcase
      if (vals[i] > 65535) vals[i] = 65535;
    end
    vals.sort();
    model(vals, M / 8, di, da, cpa);
    model(vals, 48, di, db, cpb);
    sum = 0;
    foreach (vals[i]) sum += vals[i];
    wait (rdy_a && rdy_b);
    @(negedge clk);
    for (int i = M - 1; i >= 0; i--) begin
      in_valid = 1; in_data = 16'(vals[i]);
      @(negedge clk);
    end
    in_valid = 0;
    fa = 0; fb = 0;
    while (!(fa && fb)) begin
      if (done_a) fa = 1;
      if (done_b) fb = 1;
      @(negedge clk);
    end
    checks += 4;
    if (!close(real'(di_a), di, 0.01, 2.0)) begin failures++; $display("init %0d exp %f", di_a, di); end
    if (avg_a != 16'(sum / M)) begin failures++; $display("avg %0d exp %0d", avg_a, sum / M); end
    if (!close(real'(d0_a), da, 0.04, 4.0)) begin failures++; $display("A d0 %0d exp %f", d0_a, da); end
    if (!close(real'(d0_b), db, 0.04, 4.0)) begin failures++; $display("B d0 %0d exp %f kind %0d init %0d %f", d0_b, db, kind, di_b, di); end
    checks += 2;
    if (cp_a != cpa) begin failures++; $display("A cp %0b exp %0b", cp_a, cpa); end
    if (cp_b != cpb) begin failures++; $display("B cp %0b exp %0b", cp_b, cpb); end
    if (cp_b) n_cp++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < 24; v++) run_vec(v % 4);
    checks++;
    if (n_cp == 0) begin failures++; $display("c' fallback never taken"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
