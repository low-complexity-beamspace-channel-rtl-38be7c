// threshold_calc: hypothesis-test threshold eta from D0, SDNR and the active-beam count qM.
//
//   eta = D0 * (1 + qM/(M SDNR)) * ( ln((1 + M SDNR/qM) C) + ln(M - qM) - ln(qM) )
//
// which is the Bayesian decision threshold rewritten for an integer qM: the only true
// division, qM/(M SDNR), goes to the sequential divider; M SDNR/qM uses a reciprocal LUT
// indexed by qM; ln(M - qM) and ln(qM) come from a LUT indexed by qM; the remaining
// logarithm, of y = (1 + M SDNR/qM) C (C a power of two, so a shift), is computed piecewise
// linearly: an MSB detector gives y = 2^a * x with x in [1, 2), and
//   ln y = a ln2 + k1[s] x + k0[s],
// with the chord coefficients k1, k0 of segment s (the SEG_B bits after the leading one) read
// from a coefficient LUT. Structure and LUT/divider split follow the published unit; the
// segment count (8), the LUT precision (LUT_F fractional bits) and the output format
// (Q16.8, clipped to 0 .. 2^24-1) are this design's choices. The quotient qM/(M SDNR) is kept
// in Q8.16; when it saturates (SDNR = 0 or nearly) eta is set to its largest value, so
// nothing is kept.
// Latency: done pulses QD_W + 6 clocks after start (30 clocks), not the 3 of the published
// implementation, whose divider organisation is not described.
// Of the normalized y only the LUT_F mantissa bits below the leading one are used (x and the
// segment index); the leading one itself and the bits below the mantissa are unused on purpose.
module threshold_calc
  import bcd_pkg::*;
#(
  parameter int M        = 64,
  parameter int LOG2_CC  = LOG2_COST
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [SDNR_W-1:0] sdnr,
  input  logic [$clog2(M):0] qm,
  input  logic [SQ_W-1:0]   d0,
  output logic              done,
  output logic [ETA_W-1:0]  eta
);
  localparam int LM   = $clog2(M);
  localparam int MS_W = SDNR_W + LM;                       // M*SDNR, FRAC fractional bits
  localparam int RW   = LUT_F + 1;                         // 1/qM, LUT_F fractional bits
  localparam int YW   = MS_W - FRAC + LUT_F + LOG2_CC + 2; // y, LUT_F fractional bits
  localparam int QD_W = 8 + LUT_F;                         // qM/(M SDNR), Q8.16
  localparam int L_W  = 32;                                // logarithms, signed, LUT_F frac

  typedef logic [RW-1:0]         recip_arr_t [M+1];
  typedef logic signed [L_W-1:0] ln_arr_t    [M+1];
  typedef logic signed [L_W-1:0] seg_arr_t   [1 << SEG_B];
  function automatic recip_arr_t mk_recip();
    recip_arr_t a;
    for (int m = 0; m <= M; m++) a[m] = RW'(recip_q(m));
    return a;
  endfunction
  function automatic ln_arr_t mk_ln();
    ln_arr_t a;
    for (int m = 0; m <= M; m++) a[m] = L_W'(ln_q(m));
    return a;
  endfunction
  function automatic seg_arr_t mk_k1();
    seg_arr_t a;
    for (int s = 0; s < (1 << SEG_B); s++) a[s] = L_W'(pwl_k1_q(s));
    return a;
  endfunction
  function automatic seg_arr_t mk_k0();
    seg_arr_t a;
    for (int s = 0; s < (1 << SEG_B); s++) a[s] = L_W'(pwl_k0_q(s));
    return a;
  endfunction
  localparam recip_arr_t RECIP = mk_recip();
  localparam ln_arr_t    LN    = mk_ln();
  localparam seg_arr_t   K1    = mk_k1();
  localparam seg_arr_t   K0    = mk_k0();

  typedef enum logic [2:0] {S_IDLE, S_LOG, S_DIV, S_MUL, S_OUT} state_t;
  state_t state;

  logic [SDNR_W-1:0] sdnr_b;
  logic [LM:0]       qm_b;
  logic [SQ_W-1:0]   d0_b;

  // ---------------------------------------------------------------- log path (combinational)
  logic [MS_W-1:0]          msdnr;
  logic [MS_W+RW-1:0]       r_full;        // M SDNR / qM, FRAC + LUT_F fractional bits
  logic [YW-1:0]            y;             // (1 + M SDNR/qM) C, LUT_F fractional bits
  logic [$clog2(YW)-1:0]    p;             // MSB position
  logic [YW-1:0]            ynorm;
  logic [SEG_B-1:0]         seg;
  logic signed [L_W-1:0]    xq;            // mantissa x in [1,2), LUT_F fractional bits
  logic signed [2*L_W-1:0]  k1x;
  logic signed [L_W-1:0]    ln_y, ln_sum;
  always_comb begin
    msdnr  = MS_W'(sdnr_b) << LM;
    r_full = (MS_W+RW)'(msdnr) * (MS_W+RW)'(RECIP[qm_b]);
    y      = (YW'(r_full >> FRAC) + YW'(1 << LUT_F)) << LOG2_CC;
    p      = '0;
    for (int i = 0; i < YW; i++) if (y[i]) p = ($clog2(YW))'(i);
    ynorm  = y << (YW - 1 - int'(p));
    seg    = ynorm[YW-2 -: SEG_B];
    xq     = L_W'(1 << LUT_F) | L_W'(ynorm[YW-2 -: LUT_F]);
    k1x    = (2*L_W)'(K1[seg]) * (2*L_W)'(xq);
    ln_y   = (L_W'(int'(p) - LUT_F) * L_W'(LN2_Q)) + L_W'(k1x >>> LUT_F) + K0[seg];
    ln_sum = ln_y + LN[(LM+1)'(M) - qm_b] - LN[qm_b];
  end

  // ---------------------------------------------------------------- divider path
  logic              div_start, div_busy, div_done;
  logic [QD_W-1:0]   qd;
  logic signed [L_W-1:0] ln_r;
  logic [SQ_W+QD_W:0]    e1;               // D0 (1 + qM/(M SDNR)), FRAC + LUT_F fractional
  logic signed [SQ_W+QD_W+L_W+1:0] e2;

  seq_divider #(.NW(LM + 1 + FRAC + LUT_F), .DW(MS_W), .QW(QD_W)) u_div (
    .clk, .rst_n, .start(div_start),
    .num({qm_b, (FRAC + LUT_F)'(0)}), .den(msdnr),
    .busy(div_busy), .done(div_done), .quo(qd)
  );

  assign e2 = $signed({1'b0, e1}) * (SQ_W+QD_W+L_W+2)'(ln_r);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      sdnr_b    <= '0;
      qm_b      <= '0;
      d0_b      <= '0;
      ln_r      <= '0;
      e1        <= '0;
      eta       <= '0;
      done      <= 1'b0;
      div_start <= 1'b0;
    end else begin
      done      <= 1'b0;
      div_start <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          sdnr_b <= sdnr;
          qm_b   <= qm;
          d0_b   <= d0;
          state  <= S_LOG;
        end
        S_LOG: begin
          ln_r      <= ln_sum;
          div_start <= 1'b1;
          state     <= S_DIV;
        end
        S_DIV: if (div_done) state <= S_MUL;
        S_MUL: begin
          e1    <= (SQ_W+QD_W+1)'(d0_b) * ((SQ_W+QD_W+1)'(qd) + (SQ_W+QD_W+1)'(1 << LUT_F));
          state <= S_OUT;
        end
        S_OUT: begin
          // e2 has 2*LUT_F + FRAC fractional bits
          if (qd == '1)                                 eta <= '1;   // SDNR ~ 0
          else if (e2 < 0)                              eta <= '0;
          else if ((e2 >>> (2 * LUT_F)) >> ETA_W != 0)  eta <= '1;
          else                                          eta <= ETA_W'(e2 >>> (2 * LUT_F));
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  logic unused;
  assign unused = div_busy;
endmodule
