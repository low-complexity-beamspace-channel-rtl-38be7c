// truncated_mean: blind composite-noise-power estimator working on the sorted squared
// magnitudes (Algorithm "blind composite noise power estimator", truncated-mean unit).
//
// Input: the M values |h'|^2 of one vector from the sorting unit, largest first. Each value is
// stored at its ascending rank a (a = M-1 for the first) together with the running sum S[a],
// the sum of all values of rank >= a; so the sum of the n smallest values is S[0] - S[n], and
// S[0] = ||h'||^2 gives the mean power ||h'||^2 / M by a shift. (The published unit keeps
// prefix sums of an ascending stream; with the sorter's descending stream this suffix form
// is the equivalent.)
// Then:
//   init     D(0) = median * (1/ln 2), median = mean of the ranks M/2-1 and M/2 (0-based);
//   iterate  T times: tau = c*D (shift); walk an index n one step per clock, up while the
//            value at rank n is <= tau, down while the value at rank n-1 is > tau, until n is
//            the size of the noise set |S|; if n < RHO_MIN, redo the walk with tau = c'*D;
//            D <- (S[0]-S[n]) * (1/n LUT) * (1/kappa(c) or 1/kappa(c') LUT).
// The walk starts where the previous one ended (M/2 at first), so it takes few steps.
// Outputs hold after done (one-clock pulse) until the next vector completes. c, c', T, the
// median rule, the index walk and the LUT normalizations follow the paper; RHO_MIN = M/8, the
// LUT precision (LUT_F fractional bits), the kappa(c') choice after the c' set (printed in
// the unit's figure, while the algorithm listing keeps kappa(c)), keeping D when even the
// c' set is empty, and carrying D and the mean with DF = 4 extra fractional bits between
// iterations (D0 is rounded to the port format only at the end; without them the truncation
// of a D0 of a few tens of LSB drifts downward over the iterations) are this design's choices.
// Bit 0 of the median sum is dropped on purpose: the median is the sum shifted right by one.
module truncated_mean
  import bcd_pkg::*;
#(
  parameter int M       = 64,
  parameter int T       = N_ITER,
  parameter int LOG2_C  = LOG2_C_SET,
  parameter int LOG2_CP = LOG2_CP_SET,
  parameter int RHO_MIN = M / 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [SQ_W-1:0] in_data,
  output logic            in_ready,
  output logic            done,
  output logic [SQ_W-1:0] d0,
  output logic [SQ_W-1:0] d0_init,
  output logic [SQ_W-1:0] avg_pwr,
  output logic            used_cp      // the last iteration fell back to c'
);
  localparam int LM   = $clog2(M);
  localparam int CW   = $clog2(M + 1);
  localparam int CS_W = SQ_W + LM;
  localparam int TW   = SQ_W + LOG2_CP;
  localparam int RW   = LUT_F + 1;
  localparam int DF   = 4;        // extra fractional bits of D and of the mean inside the unit
  localparam int DW   = SQ_W + DF;

  typedef logic [RW-1:0] recip_arr_t [M+1];
  function automatic recip_arr_t mk_recip();
    recip_arr_t a;
    for (int m = 0; m <= M; m++) a[m] = RW'(recip_q(m));
    return a;
  endfunction
  localparam recip_arr_t RECIP = mk_recip();
  localparam logic [RW:0] K_C  = (RW+1)'(INV_KC_Q);
  localparam logic [RW:0] K_CP = (RW+1)'(INV_KCP_Q);
  localparam logic [RW:0] ILN2 = (RW+1)'(INV_LN2_Q);

  typedef enum logic [2:0] {S_LOAD, S_INIT, S_TAU, S_WALK, S_CHK, S_SUM, S_CORR} state_t;
  state_t state;

  logic [SQ_W-1:0] smem [M];      // sorted values by ascending rank
  logic [CS_W-1:0] cmem [M];      // S[a] = sum of values of rank >= a
  logic [CS_W-1:0] run;
  logic [CW-1:0]   k, n;
  logic [$clog2(T+1)-1:0] iter;
  logic            use_cp;
  logic [TW-1:0]   tau;
  logic [DW-1:0]   d_cur;        // current D with DF extra fractional bits
  logic [CS_W+RW-1:0] mean_q;     // truncated mean with LUT_F extra fractional bits
  logic [DW+1:0]      mean_r;     // truncated mean with DF extra fractional bits

  // combinational helpers
  logic [LM-1:0]   wr_a;
  logic [CS_W-1:0] run_nx, tsum;
  logic [SQ_W:0]   med2;
  logic [SQ_W+RW:0] dinit_p;
  logic [DW+RW+2:0] dcorr_p;
  logic            step_up, step_dn;
  always_comb begin
    wr_a    = LM'(M - 1 - int'(k));
    run_nx  = run + CS_W'(in_data);
    med2    = (SQ_W+1)'(smem[M/2-1]) + (SQ_W+1)'(smem[M/2]);
    dinit_p = (SQ_W+RW+1)'(med2[SQ_W:1]) * (SQ_W+RW+1)'(ILN2);
    tsum    = cmem[0] - ((n < CW'(M)) ? cmem[LM'(n)] : '0);
    dcorr_p = (DW+RW+3)'(mean_r) * (DW+RW+3)'(use_cp ? K_CP : K_C);
    step_up = (n < CW'(M)) && (TW'(smem[LM'(n)]) <= tau);
    step_dn = (n > 0) && (TW'(smem[LM'(n - 1'b1)]) > tau);
  end

  // saturate to DW bits (D with DF extra fractional bits)
  function automatic logic [DW-1:0] satd(logic [DW+RW+2:0] v);
    return ((v >> DW) != 0) ? '1 : v[DW-1:0];
  endfunction
  // round away the DF extra bits and saturate to the SQ_W-bit port format
  function automatic logic [SQ_W-1:0] rnd16(logic [DW-1:0] v);
    logic [DW:0] r;
    r = (DW+1)'(v) + (DW+1)'(1 << (DF - 1));
    return ((r >> (DW + 0)) != 0 || (r >> DF) > (DW+1)'(2 ** SQ_W - 1)) ? '1 : SQ_W'(r >> DF);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_LOAD;
      k       <= '0;
      n       <= '0;
      iter    <= '0;
      use_cp  <= 1'b0;
      used_cp <= 1'b0;
      run     <= '0;
      tau     <= '0;
      d_cur   <= '0;
      d0      <= '0;
      d0_init <= '0;
      avg_pwr <= '0;
      mean_q  <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_LOAD: if (in_valid) begin
          run <= run_nx;
          k   <= k + 1'b1;
          if (k == CW'(M - 1)) state <= S_INIT;
        end
        S_INIT: begin
          d_cur   <= satd((DW+RW+3)'(dinit_p >> (LUT_F - DF)));
          d0_init <= rnd16(satd((DW+RW+3)'(dinit_p >> (LUT_F - DF))));
          avg_pwr <= SQ_W'(cmem[0] >> LM);
          n       <= CW'(M / 2);
          iter    <= '0;
          use_cp  <= 1'b0;
          state   <= S_TAU;
        end
        S_TAU: begin
          tau   <= use_cp ? TW'(((DW+LOG2_CP)'(d_cur) << LOG2_CP) >> DF)
                          : TW'(((DW+LOG2_CP)'(d_cur) << LOG2_C) >> DF);
          state <= S_WALK;
        end
        S_WALK: begin
          if (step_up)      n <= n + 1'b1;
          else if (step_dn) n <= n - 1'b1;
          else              state <= S_CHK;
        end
        S_CHK: begin
          if (n < CW'(RHO_MIN) && !use_cp) begin
            use_cp <= 1'b1;
            state  <= S_TAU;
          end else begin
            state  <= S_SUM;
          end
        end
        S_SUM: begin
          mean_q <= (CS_W+RW)'(tsum) * (CS_W+RW)'(RECIP[n]);
          state  <= S_CORR;
        end
        S_CORR: begin
          if (n != 0) d_cur <= satd(dcorr_p >> LUT_F);
          used_cp <= use_cp;
          use_cp  <= 1'b0;
          iter    <= iter + 1'b1;
          if (int'(iter) == T - 1) begin
            state <= S_LOAD;
            k     <= '0;
            run   <= '0;
            done  <= 1'b1;
            d0    <= rnd16((n != 0) ? satd(dcorr_p >> LUT_F) : d_cur);
          end else begin
            state <= S_TAU;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // mean with DF extra fractional bits, saturated to the sample width plus two guard bits
  assign mean_r = ((mean_q >> (LUT_F - DF)) >> (DW + 2)) != 0 ? '1 : (DW+2)'(mean_q >> (LUT_F - DF));

  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid) begin
      smem[wr_a] <= in_data;
      cmem[wr_a] <= run_nx;
    end
  end

  assign in_ready = (state == S_LOAD);
endmodule
